// tb_l1_cache: writes random rows to random addresses of all four
// partitions of the full 8 MB L1 cache, one read and one write per
// partition per cycle, and reads them back with the one-cycle latency;
// a reference copy is kept in an associative array.
module tb_l1_cache;
  import fhe_pkg::*;
  localparam int D = L1_DEPTH, AWL = $clog2(D);
  logic clk = 0;
  logic [NPART-1:0] rd_en = '0, wr_en = '0;
  logic [NPART-1:0][AWL-1:0] rd_addr, wr_addr;
  coeff_t [NPART-1:0][PART_LANES-1:0] rd_data, wr_data;
  int checks = 0, failures = 0;
  coeff_t [PART_LANES-1:0] shadow [NPART][int];
  always #5 clk = ~clk;
  l1_cache dut (.*);
  initial begin
    int addrs [NPART][$];
    for (int t = 0; t < 64; t++) begin
      @(negedge clk);
      for (int p = 0; p < NPART; p++) begin
        int a;
        a = (t < 2) ? (t == 0 ? 0 : D - 1) : $urandom_range(0, D - 1);
        wr_en[p] = 1; wr_addr[p] = AWL'(a);
        for (int i = 0; i < PART_LANES; i++) wr_data[p][i] = coeff_t'($urandom);
        shadow[p][a] = wr_data[p];
        addrs[p].push_back(a);
      end
    end
    @(negedge clk); wr_en = '0;
    for (int t = 0; t < 64; t++) begin
      int a [NPART];
      for (int p = 0; p < NPART; p++) begin
        a[p] = addrs[p][t];
        rd_en[p] = 1; rd_addr[p] = AWL'(a[p]);
      end
      @(negedge clk); rd_en = '0;
      for (int p = 0; p < NPART; p++) begin
        checks++;
        if (rd_data[p] != shadow[p][a[p]]) failures++;
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
