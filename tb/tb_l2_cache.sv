// tb_l2_cache: writes random 256-lane rows to random addresses of the full
// 256 MB L2 cache (including the first and last row) while reading other
// rows in the same cycles, then reads everything back and compares with a
// reference copy.
module tb_l2_cache;
  import fhe_pkg::*;
  localparam int D = 262144, AWL = 18;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [AWL-1:0] rd_addr, wr_addr;
  coeff_t [ROW_LANES-1:0] rd_data, wr_data;
  int checks = 0, failures = 0;
  coeff_t [ROW_LANES-1:0] shadow [int];
  int addrs [$];
  always #5 clk = ~clk;
  l2_cache dut (.*);
  initial begin
    for (int t = 0; t < 40; t++) begin
      int a;
      @(negedge clk);
      a = (t == 0) ? 0 : (t == 1) ? D - 1 : $urandom_range(0, D - 1);
      while (shadow.exists(a)) a = (a + 1) % D;
      wr_en = 1; wr_addr = AWL'(a);
      for (int i = 0; i < ROW_LANES; i++) wr_data[i] = coeff_t'($urandom);
      shadow[a] = wr_data; addrs.push_back(a);
      rd_en = (t > 0); rd_addr = AWL'(addrs[0]);
      @(posedge clk); #1;
      if (t > 0) begin checks++; if (rd_data != shadow[addrs[0]]) failures++; end
    end
    @(negedge clk); wr_en = 0;
    foreach (addrs[k]) begin
      rd_en = 1; rd_addr = AWL'(addrs[k]);
      @(negedge clk);
      checks++; if (rd_data != shadow[addrs[k]]) failures++;
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
