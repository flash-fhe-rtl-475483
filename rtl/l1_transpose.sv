// l1_transpose: local transpose of one cluster, NBLK 32-port building blocks
// side by side (eight in a bootstrappable cluster, four in a swift cluster).
// Block b serves lanes 32b..32b+31.  All blocks share the row counter
// restart (`sync`) and the exit setting, so a pass transposes the DxD tiles
// of every 32-lane group at once.  Latency and interface timing are those of
// l1_transpose_block.  The block counts follow the paper; sharing one
// control among the blocks is this design's choice.
module l1_transpose
  import fhe_pkg::*;
#(
  parameter int NBLK = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sync,
  input  logic       in_valid,
  input  coeff_t     in_data [NBLK*TB_PORTS],
  input  logic [2:0] exit_stage,
  output logic       out_valid,
  output coeff_t     out_data [NBLK*TB_PORTS]
);
  logic blk_valid [NBLK];
  for (genvar b = 0; b < NBLK; b++) begin : g_blk
    coeff_t bi [TB_PORTS], bo [TB_PORTS];
    for (genvar p = 0; p < TB_PORTS; p++) begin : g_p
      assign bi[p] = in_data[b*TB_PORTS + p];
      assign out_data[b*TB_PORTS + p] = bo[p];
    end
    l1_transpose_block #(.PORTS(TB_PORTS)) u_blk (
      .clk, .rst_n, .sync, .in_valid, .in_data(bi), .exit_stage,
      .out_valid(blk_valid[b]), .out_data(bo));
  end
  assign out_valid = blk_valid[0];
endmodule
