// tb_data_distributor: sends 16 columns in shallow mode to affiliation 5 and
// 24 columns in deep mode, and checks the partition, affiliation and row
// of every write: column i -> cluster i mod 4 (row base+i/4) in shallow
// mode, bootstrappable cluster of affiliation i mod 8 (row base+i/8) in
// deep mode, one cycle after the column.
module tb_data_distributor;
  import fhe_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, mode = 0;
  logic [2:0] aff;
  logic [15:0] col_idx;
  logic [L1_AW-1:0] base, wr_addr;
  coeff_t [ROW_LANES-1:0] in_data, wr_data, prev;
  logic [NAFF-1:0][NPART-1:0] wr_part, expp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  data_distributor dut (.*);
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int m = 0; m < 2; m++) begin
      int n;
      n = (m == 0) ? 16 : 24;
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        mode = m[0]; aff = 3'd5; col_idx = 16'(i); base = 100; in_valid = 1;
        for (int l = 0; l < ROW_LANES; l++) in_data[l] = coeff_t'($urandom);
        prev = in_data;
        @(negedge clk); in_valid = 0;
        expp = '0;
        if (m == 0) expp[5][i % 4] = 1'b1; else begin expp[i % 8][0] = 1'b1; expp[i % 8][1] = 1'b1; end
        checks += 3;
        if (wr_part != expp) failures++;
        if (wr_addr != L1_AW'(100 + ((m == 0) ? i / 4 : i / 8))) failures++;
        if (wr_data != prev) failures++;
        @(negedge clk);
        checks++; if (wr_part != '0) failures++;
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
