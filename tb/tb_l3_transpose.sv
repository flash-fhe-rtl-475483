// tb_l3_transpose: drives random vectors into the l3 transpose at its
// full size (8 clusters x 256 lanes) and checks that port i of cluster j
// arrives on lane p mod 256 of cluster p / 256 with p = 8*i + j, one cycle
// later.
module tb_l3_transpose;
  import fhe_pkg::*;
  localparam int C = 8, L = 256;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  coeff_t in_data [C][L], out_data [C][L], ref_d [C][L];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  l3_transpose dut (.*);
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      @(negedge clk);
      for (int j = 0; j < C; j++) for (int i = 0; i < L; i++) in_data[j][i] = coeff_t'($urandom);
      ref_d = in_data; in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++; if (!out_valid) failures++;
      for (int j = 0; j < C; j++) for (int i = 0; i < L; i++) begin
        int p; p = C * i + j;
        checks++; if (out_data[p / L][p % L] != ref_d[j][i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
