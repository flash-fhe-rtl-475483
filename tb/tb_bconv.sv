// tb_bconv: random basis conversions through the 60-input BConv unit, one
// per cycle back to back, with and without the final accumulate, checked
// against a 64-bit integer sum; the latency of 8 cycles is checked.
module tb_bconv;
  import fhe_pkg::*;
  localparam int LS = 60, LAT = 8, NT = 50;
  logic clk = 0, rst_n = 0, in_valid = 0, acc_en = 0, out_valid;
  coeff_t x [LS], k [LS], q, acc_in, y;
  int checks = 0, failures = 0, cyc = 0, nout = 0;
  longint expq [$];
  int tin [$];
  coeff_t accv [NT];
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  bconv #(.LSUB(LS)) dut (.*);

  initial begin
    q = 32'd1073479681;
    for (int i = 0; i < NT; i++) accv[i] = coeff_t'($urandom % q);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      longint s;
      s = 0;
      @(negedge clk);
      for (int i = 0; i < LS; i++) begin
        x[i] = coeff_t'($urandom % q); k[i] = coeff_t'($urandom % q);
        s = (s + (longint'(x[i]) * k[i]) % q) % q;
      end
      if (t % 2 == 1) s = (s + accv[t]) % q;
      expq.push_back(s); tin.push_back(cyc);
      in_valid = 1;
    end
    @(negedge clk); in_valid = 0;
    repeat (20) @(negedge clk);
    checks++; if (nout != NT) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // acc_in is presented LAT-1 cycles after its x
  int tq [$];
  always @(negedge clk) begin
    acc_en = 0; acc_in = 0;
    foreach (tin[i]) if (cyc - tin[i] == LAT - 1) begin acc_en = (i % 2 == 1); acc_in = accv[i]; end
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (y != coeff_t'(expq[nout])) begin failures++; if (failures < 5) $display("conv %0d got %0d exp %0d", nout, y, expq[nout]); end
    if (cyc - tin[nout] != LAT) failures++;
    nout++;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
