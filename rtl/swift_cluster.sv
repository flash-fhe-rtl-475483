// swift_cluster: computation cluster for shallow workloads.
//
// A 128-point (i)NTT pipeline (NTT network, modular calculation, L1
// transpose of four building blocks, output selector) without a BConv
// module, driven by the same cluster_seq command sequencer as the
// bootstrappable cluster.  It reads and writes 128-lane rows of its own L1
// partition.  There is no BConv: a CK_BCONV command sent here completes
// with zero results.
//
// NTT stage numbers in a command are those of the 256-point network of the
// bootstrappable cluster; this network is taken as its last seven stages
// (stage s here = stage s+1 there), so a command with entrance 1 and exit 7
// runs 128-point NTTs on both kinds of cluster in lock step.
//
// Sizes follow the paper (2^7-point circuit, four transpose blocks, no
// BConv); the command interface is this design's.
module swift_cluster
  import fhe_pkg::*;
#(
  parameter int POINTS = 128,
  parameter int LAW    = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  ccmd_t       cmd,
  output logic        busy,
  output logic        rd_en,
  output logic [LAW-1:0] rd_addr,
  input  coeff_t [POINTS-1:0] rd_data,
  output logic        wr_en,
  output logic [LAW-1:0] wr_addr,
  output coeff_t [POINTS-1:0] wr_data,
  output route_e      wr_route
);
  ccmd_t  cur;
  logic   p_sync, p_valid, p_out_valid, b_valid, b_acc_en;
  coeff_t b_acc_in;
  coeff_t tw [POINTS/2], step [POINTS], bconst [1];
  coeff_t p_in [POINTS], p_out [POINTS];
  coeff_t [POINTS-1:0] p_out_packed;
  logic   b_done;
  pass_cfg_t scfg;

  // Stage numbers in a command count the stages of the 256-point network;
  // the POINTS-point network here is its last log2(POINTS) stages, so the
  // same command runs POINTS-point NTTs on every cluster of an affiliation.
  localparam int SOFF = $clog2(BOOT_POINTS) - $clog2(POINTS);
  always_comb begin
    scfg = cur.cfg;
    scfg.entrance   = (int'(cur.cfg.entrance) > SOFF)   ? 3'(int'(cur.cfg.entrance) - SOFF)   : 3'd0;
    scfg.exit_stage = (int'(cur.cfg.exit_stage) > SOFF) ? 3'(int'(cur.cfg.exit_stage) - SOFF) : 3'd0;
  end

  for (genvar i = 0; i < POINTS; i++) begin : g_cv
    assign p_in[i]         = rd_data[i];
    assign p_out_packed[i] = p_out[i];
  end

  // no BConv: each BConv request is answered with a zero result
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) b_done <= 1'b0;
    else        b_done <= b_valid;
  end

  cluster_seq #(.POINTS(POINTS), .NLSUB(1), .LAW(LAW)) u_seq (
    .clk, .rst_n, .cmd_valid, .cmd, .busy, .cur,
    .rd_en, .rd_addr, .rd_data,
    .p_sync, .p_valid, .p_out_valid, .p_out_data(p_out_packed),
    .b_valid, .b_acc_en, .b_acc_in, .b_out_valid(b_done), .b_y('0),
    .tw, .step, .bconst,
    .wr_en, .wr_addr, .wr_data, .wr_route);

  ntt_pipeline #(.POINTS(POINTS)) u_pipe (
    .clk, .rst_n, .sync(p_sync), .in_valid(p_valid), .in_data(p_in),
    .cfg(scfg), .tw, .step, .scalar(cur.scalar), .q(cur.q),
    .out_valid(p_out_valid), .out_data(p_out));
endmodule
