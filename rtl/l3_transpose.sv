// l3_transpose: L3 transpose, a fixed-wiring exchange among the clusters of
// all eight bootstrappable clusters, 2048 ports.
//
// Port i of the L1 transpose of cluster j drives port (8 x i + j) of the
// L3 transpose, as the paper specifies.  Port p of the L3 transpose then
// feeds lane p mod LANES of cluster p / LANES; this output side is this
// design's reading, and makes the module the transpose of an LANES x NCL
// lane arrangement into NCL x LANES.  No multiplexers: the wiring is static,
// and a single register stage (this design's choice, for the long global
// wires) gives a latency of 1 cycle with one vector per cycle.
module l3_transpose
  import fhe_pkg::*;
#(
  parameter int NCL   = 8,
  parameter int LANES = 256
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  coeff_t in_data  [NCL][LANES],
  output logic   out_valid,
  output coeff_t out_data [NCL][LANES]
);
  coeff_t port_w [NCL*LANES];
  for (genvar j = 0; j < NCL; j++) begin : g_cl
    for (genvar i = 0; i < LANES; i++) begin : g_ln
      assign port_w[NCL*i + j] = in_data[j][i];
    end
  end
  always_ff @(posedge clk) begin
    for (int p = 0; p < NCL*LANES; p++) out_data[p / LANES][p % LANES] <= port_w[p];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
