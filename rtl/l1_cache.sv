// l1_cache: the 8 MB L1 cache shared by the three clusters of one cluster
// affiliation.
//
// It is organised as NPART = 4 partitions of PART_LANES = 128 coefficients
// per row (4096 rows each), one per cluster index 0..3 of the affiliation:
// the bootstrappable cluster uses partitions 0 and 1 side by side as one
// 256-lane row, swift cluster 0 partition 2, swift cluster 1 partition 3.
// Each partition serves one read and one write per core cycle (a
// double-pumped single-port SRAM).  Read latency is 1 cycle.
//
// The 8 MB size and the double pumping are the paper's; the partitioning,
// row width and port assignment are this design's.
module l1_cache
  import fhe_pkg::*;
#(
  parameter int DEPTH = L1_DEPTH
) (
  input  logic                              clk,
  input  logic [NPART-1:0]                  rd_en,
  input  logic [NPART-1:0][$clog2(DEPTH)-1:0] rd_addr,
  output coeff_t [NPART-1:0][PART_LANES-1:0] rd_data,
  input  logic [NPART-1:0]                  wr_en,
  input  logic [NPART-1:0][$clog2(DEPTH)-1:0] wr_addr,
  input  coeff_t [NPART-1:0][PART_LANES-1:0] wr_data
);
  for (genvar p = 0; p < NPART; p++) begin : g_part
    sram_1r1w #(.WIDTH(PART_LANES * W), .DEPTH(DEPTH)) u_ram (
      .clk, .rd_en(rd_en[p]), .rd_addr(rd_addr[p]), .rd_data(rd_data[p]),
      .wr_en(wr_en[p]), .wr_addr(wr_addr[p]), .wr_data(wr_data[p]));
  end
endmodule
