// tb_mod_mul: random and corner-case products checked against 64-bit
// integer arithmetic for several moduli up to 2^31.
module tb_mod_mul;
  logic [31:0] a, b, q, y;
  int checks = 0, failures = 0;
  mod_mul #(.W(32)) dut (.*);
  initial begin
    logic [31:0] qs [4];
    qs = '{32'd7681, 32'd12289, 32'd1073479681, 32'd2013265921};
    for (int m = 0; m < 4; m++) begin
      q = qs[m];
      for (int t = 0; t < 500; t++) begin
        a = $urandom % q; b = $urandom % q;
        if (t == 0) begin a = q - 1; b = q - 1; end
        if (t == 1) begin a = 0; b = q - 1; end
        #1;
        checks++;
        if (y != 32'((longint'(a) * longint'(b)) % longint'(q))) begin
          failures++;
          if (failures < 5) $display("a=%0d b=%0d q=%0d y=%0d", a, b, q, y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
