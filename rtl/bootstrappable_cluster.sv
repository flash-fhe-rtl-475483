// bootstrappable_cluster: computation cluster for deep workloads.
//
// Holds a 256-point (i)NTT pipeline (NTT network, modular calculation, L1
// transpose of eight building blocks, output selector) and a BConv module
// with l_sub = 60 modular multipliers, driven by a cluster_seq command
// sequencer.  The cluster reads and writes 256-lane rows of its
// affiliation's L1 cache (partitions 0 and 1).  With a CK_PASS command the
// pipeline can run one full 256-point NTT stage sequence, or, entered at a
// later stage, several smaller NTTs in parallel, which is how the cluster
// serves shallow workloads; the BConv module is then simply not used.
//
// Interface: cmd_valid/cmd are taken when busy is low; L1 read data returns
// one cycle after rd_en; every result row appears on wr_* with its route.
// Sizes follow the paper; the command interface is this design's.
module bootstrappable_cluster
  import fhe_pkg::*;
#(
  parameter int POINTS = 256,
  parameter int NLSUB  = 60,
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
  logic   p_sync, p_valid, p_out_valid, b_valid, b_acc_en, b_out_valid;
  coeff_t b_acc_in, b_y;
  coeff_t tw [POINTS/2], step [POINTS], bconst [NLSUB];
  coeff_t p_in [POINTS], p_out [POINTS], bx [NLSUB];
  coeff_t [POINTS-1:0] p_out_packed;

  for (genvar i = 0; i < POINTS; i++) begin : g_cv
    assign p_in[i]         = rd_data[i];
    assign p_out_packed[i] = p_out[i];
  end
  for (genvar i = 0; i < NLSUB; i++) begin : g_bx
    assign bx[i] = rd_data[i % POINTS];
  end

  cluster_seq #(.POINTS(POINTS), .NLSUB(NLSUB), .LAW(LAW)) u_seq (
    .clk, .rst_n, .cmd_valid, .cmd, .busy, .cur,
    .rd_en, .rd_addr, .rd_data,
    .p_sync, .p_valid, .p_out_valid, .p_out_data(p_out_packed),
    .b_valid, .b_acc_en, .b_acc_in, .b_out_valid, .b_y,
    .tw, .step, .bconst,
    .wr_en, .wr_addr, .wr_data, .wr_route);

  ntt_pipeline #(.POINTS(POINTS)) u_pipe (
    .clk, .rst_n, .sync(p_sync), .in_valid(p_valid), .in_data(p_in),
    .cfg(cur.cfg), .tw, .step, .scalar(cur.scalar), .q(cur.q),
    .out_valid(p_out_valid), .out_data(p_out));

  bconv #(.LSUB(NLSUB)) u_bconv (
    .clk, .rst_n, .in_valid(b_valid), .x(bx), .k(bconst), .q(cur.q),
    .acc_en(b_acc_en), .acc_in(b_acc_in), .out_valid(b_out_valid), .y(b_y));
endmodule
