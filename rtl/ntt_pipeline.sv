// ntt_pipeline: the (i)NTT pipeline of a computation cluster.
//
//   in -> NTT network -> modular calculation -> L1 transpose
//                 \______________\______________\__> data output selector -> out
//
// A four-step NTT of N = POINTS x C coefficients takes two passes: the first
// runs POINTS-point column NTTs, multiplies the twisting factors (MC_TWIST)
// and transposes the DxD tiles; the result goes back to the L1 cache, from
// which the second pass reads it into the network again.  Every unit can be
// bypassed: ntt_en = 0 routes the input around the network, MC_BYPASS
// passes the modular unit, tr_en = 0 skips the transpose.  The output
// selector returns the network output, the modular unit output, or the
// transpose output.
//
// Interface: one vector of POINTS coefficients per cycle; `sync` comes with
// the first vector of a pass and is forwarded to the modular unit and the
// transpose with the first vector each of them sees.  cfg, tw, step, scalar
// and q are static during a pass, and a new pass starts only after the last
// one has left.  Latency: network (exit-entrance+1, or 0 when bypassed)
// + 1 for the modular unit + transpose latency when used.
//
// From the paper: the order of the units, the output selector, bypassable
// modules.  Own choices: selector inputs, sync forwarding.
module ntt_pipeline
  import fhe_pkg::*;
#(
  parameter int POINTS = 256
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      sync,
  input  logic      in_valid,
  input  coeff_t    in_data [POINTS],
  input  pass_cfg_t cfg,
  input  coeff_t    tw [POINTS/2],
  input  coeff_t    step [POINTS],
  input  coeff_t    scalar,
  input  coeff_t    q,
  output logic      out_valid,
  output coeff_t    out_data [POINTS]
);
  localparam int NBLK = POINTS / TB_PORTS;

  logic   net_valid, nt_valid, mc_valid, tr_valid;
  coeff_t net_data [POINTS], nt_data [POINTS], mc_data [POINTS], tr_data [POINTS];
  logic   mc_pending, mc_sync, tr_sync;

  ntt_network #(.POINTS(POINTS)) u_net (
    .clk, .rst_n, .in_valid(in_valid && cfg.ntt_en), .in_data,
    .entrance(cfg.entrance), .exit_stage(cfg.exit_stage), .tw, .q,
    .out_valid(net_valid), .out_data(net_data));

  always_comb begin
    nt_valid = cfg.ntt_en ? net_valid : in_valid;
    nt_data  = cfg.ntt_en ? net_data  : in_data;
  end

  // forward the start of a pass to the first vector each unit sees
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mc_pending <= 1'b0;
    end else if (sync && in_valid) begin
      mc_pending <= cfg.ntt_en;
    end else if (nt_valid) begin
      mc_pending <= 1'b0;
    end
  end
  assign mc_sync = nt_valid && (cfg.ntt_en ? mc_pending : sync);
  logic mc_first_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mc_first_q <= 1'b0;
    else        mc_first_q <= mc_sync;
  end
  assign tr_sync = mc_valid && mc_first_q;

  mod_calc #(.LANES(POINTS)) u_mc (
    .clk, .rst_n, .sync(mc_sync), .in_valid(nt_valid), .in_data(nt_data),
    .op(cfg.mc_op), .scalar, .step, .q, .out_valid(mc_valid), .out_data(mc_data));

  l1_transpose #(.NBLK(NBLK)) u_tr (
    .clk, .rst_n, .sync(tr_sync), .in_valid(mc_valid && cfg.tr_en), .in_data(mc_data),
    .exit_stage(cfg.tr_exit), .out_valid(tr_valid), .out_data(tr_data));

  // data output selector
  always_comb begin
    unique case (cfg.out_sel)
      OS_NTT:       begin out_valid = nt_valid; out_data = nt_data; end
      OS_MODCALC:   begin out_valid = mc_valid; out_data = mc_data; end
      default:      begin
        out_valid = cfg.tr_en ? tr_valid : mc_valid;
        out_data  = cfg.tr_en ? tr_data  : mc_data;
      end
    endcase
  end
endmodule
