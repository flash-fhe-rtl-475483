// data_distributor: sends polynomial columns read from the L2 cache to the
// L1 caches of the clusters, in one of two fixed modes.
//
//   shallow (mode 0): column i (128 coefficients, lanes 0..127) goes to
//       cluster i mod 4 of affiliation `aff`, row base + i/4;
//   deep    (mode 1): column i (256 coefficients) goes to the bootstrappable
//       cluster of affiliation i mod 8 (its partitions 0 and 1), row
//       base + i/8.
// For example an 8192-point shallow NTT seen as a 128 x 64 matrix is spread
// column by column over the four clusters of one affiliation.
//
// Timing: one register, one column per cycle, latency 1.
// The two modes and the i mod 4 / i mod 8 rule are the paper's; the row
// address rule is this design's.
module data_distributor
  import fhe_pkg::*;
#(
  parameter int NA  = NAFF,
  parameter int LAW = L1_AW
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       mode,
  input  logic [2:0] aff,
  input  logic [15:0] col_idx,
  input  logic [LAW-1:0] base,
  input  coeff_t [ROW_LANES-1:0] in_data,
  output logic [NA-1:0][NPART-1:0] wr_part,
  output logic [LAW-1:0] wr_addr,
  output coeff_t [ROW_LANES-1:0] wr_data
);
  logic [NA-1:0][NPART-1:0] part_d;
  logic [LAW-1:0]           addr_d;
  always_comb begin
    part_d = '0;
    if (!mode) begin
      part_d[aff][col_idx[1:0]] = in_valid;
      addr_d = base + LAW'(col_idx >> 2);
    end else begin
      part_d[col_idx % NA][0] = in_valid;
      part_d[col_idx % NA][1] = in_valid;
      addr_d = base + LAW'(col_idx / NA);
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wr_part <= '0;
    else        wr_part <= part_d;
  end
  always_ff @(posedge clk) begin
    wr_addr <= addr_d;
    wr_data <= in_data;
  end
endmodule
