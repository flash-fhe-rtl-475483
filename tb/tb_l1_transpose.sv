// tb_l1_transpose: the bootstrappable-size L1 transpose (8 blocks, 256
// lanes) transposes 32x32 tiles (exit E4) of every 32-lane group and 4x4
// tiles (exit E1); each output row is compared with the input columns.
module tb_l1_transpose;
  import fhe_pkg::*;
  localparam int NB = 8, P = NB * 32;
  logic clk = 0, rst_n = 0, sync = 0, in_valid = 0, out_valid;
  coeff_t in_data [P], out_data [P];
  logic [2:0] exit_stage;
  int checks = 0, failures = 0, nout = 0;
  coeff_t rows [$][P];
  coeff_t r [P];
  always #5 clk = ~clk;
  l1_transpose #(.NBLK(NB)) dut (.*);
  initial begin
    exit_stage = 4;
    repeat (2) @(posedge clk); rst_n = 1;
    foreach (r[e]) r[e] = 0;
    for (int pass = 0; pass < 2; pass++) begin
      int D;
      @(negedge clk);
      exit_stage = (pass == 0) ? 3'd4 : 3'd1; D = 2 << exit_stage;
      rows.delete(); nout = 0; sync = 1;
      for (int t = 0; t < D; t++) begin
        for (int i = 0; i < P; i++) r[i] = coeff_t'($urandom);
        rows.push_back(r); in_data = r; in_valid = 1;
        @(negedge clk); sync = 0;
      end
      in_valid = 0;
      repeat (45) @(negedge clk);
      checks++; if (nout != D) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    int D; D = 2 << exit_stage;
    for (int g = 0; g < P; g += D) for (int i = 0; i < D; i++) begin
      checks++; if (out_data[g + i] != rows[i][g + nout]) failures++;
    end
    nout++;
  end
  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
