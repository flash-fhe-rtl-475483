// l2_cache: the global L2 cache shared by all cluster affiliations.
//
// 256 MB of rows of ROW_LANES = 256 coefficients (1 KB per row, 262144
// rows); together with the eight 8 MB L1 caches this makes the 320 MB of
// on-chip cache the accelerator is sized for.  One read and one write per
// core cycle (double-pumped single-port SRAM), read latency 1 cycle.
// The total size is the paper's; the split between L1 and L2, the row width
// and the port count are this design's reading.
module l2_cache
  import fhe_pkg::*;
#(
  parameter int DEPTH = 262144
) (
  input  logic clk,
  input  logic rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output coeff_t [ROW_LANES-1:0] rd_data,
  input  logic wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  coeff_t [ROW_LANES-1:0] wr_data
);
  sram_1r1w #(.WIDTH(ROW_LANES * W), .DEPTH(DEPTH)) u_ram (
    .clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);
endmodule
