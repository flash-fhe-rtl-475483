// tb_l1_transpose_block: streams several DxD matrices for every exit stage
// (D = 2..32) through the 32-port building block, with gaps of whole matrix
// periods between some of them, and checks that every output row is the
// matching column of each input matrix and that the latency is
// 2^(e+1)-1+(e+1) cycles.
module tb_l1_transpose_block;
  import fhe_pkg::*;
  localparam int P = 32;
  logic clk = 0, rst_n = 0, sync = 0, in_valid = 0, out_valid;
  coeff_t in_data [P], out_data [P];
  logic [2:0] exit_stage;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  l1_transpose_block #(.PORTS(P)) dut (.*);

  coeff_t rows [$][P];
  coeff_t r [P];
  int n_out, cyc, first_in, first_out;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    cyc = 0;
    exit_stage = 0;
    for (int i = 0; i < P; i++) in_data[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int e = 0; e < 5; e++) begin
      int D, nmat, lat;
      D = 2 << e; nmat = 3; lat = (2 << e) - 1 + e + 1;
      rows.delete();
      @(negedge clk); exit_stage = 3'(e); sync = 1; first_out = -1; n_out = 0;
      first_in = cyc;
      for (int m = 0; m < nmat; m++) begin
        for (int t = 0; t < D; t++) begin
          for (int i = 0; i < P; i++) r[i] = coeff_t'($urandom);
          rows.push_back(r);
          in_data = r; in_valid = 1;
          @(negedge clk); sync = 0;
        end
        in_valid = 0;
        if (m == 0) repeat (D) @(negedge clk);   // aligned gap
      end
      in_valid = 0;
      repeat (lat + 2 * D + 4) @(negedge clk);
      checks++;
      if (n_out != nmat * D) begin failures++; $display("e=%0d got %0d rows", e, n_out); end
      checks++;
      if (first_out - first_in != lat) begin failures++; $display("e=%0d latency %0d exp %0d", e, first_out - first_in, lat); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int D, m, t;
      D = 2 << exit_stage;
      if (first_out < 0) first_out = cyc;
      m = n_out / D; t = n_out % D;
      for (int g = 0; g < P; g += D)
        for (int i = 0; i < D; i++) begin
          checks++;
          if (out_data[g + i] != rows[m * D + i][g + t]) begin
            failures++;
            if (failures < 8) $display("D=%0d m=%0d t=%0d lane %0d", D, m, t, g + i);
          end
        end
      n_out++;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
