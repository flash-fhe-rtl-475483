// ntt_network: fully pipelined POINTS-point (i)NTT butterfly network with
// multiple entrances and exits.
//
// POINTS coefficients enter per cycle, one per lane.  The network has
// LOGP = log2(POINTS) butterfly stages; stage s pairs lanes at distance
// h = POINTS/2^(s+1) (the first stage pairs lane i with lane i+POINTS/2, the
// last stage pairs neighbours, as in the paper's NTT figure).  Data may be
// injected in front of any stage (entrance) and taken after any stage
// (exit_stage).  Because the network is a decimation-in-frequency
// (Gentleman-Sande) transform, entering at stage s runs POINTS/2^s
// independent 2^(LOGP-s)-point NTTs on contiguous lane groups with exactly
// the twiddles of the full transform: this is how one 256-point circuit is
// decomposed into several smaller parallel NTTs.
//
// Twiddles: tw[k] = w^k for k < POINTS/2, where w is a primitive POINTS-th
// root of unity mod q.  Stage s, pair offset j uses tw[j * 2^s].  Loading
// the inverse root gives the inverse NTT (scaling by 1/n is done by the
// modular calculation unit).  Results leave in bit-reversed order within
// each sub-NTT.
//
// Timing: one register per stage, latency exit_stage - entrance + 1 cycles,
// one new vector per cycle.  entrance, exit_stage, tw and q must be stable
// while data is in flight.
//
// From the paper: point counts, multi-entrance/multi-exit, butterfly
// structure.  Own choices: DIF ordering, twiddle placement, table format,
// one register per stage.
module ntt_network
  import fhe_pkg::*;
#(
  parameter int POINTS = 256
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  coeff_t     in_data [POINTS],
  input  logic [2:0] entrance,
  input  logic [2:0] exit_stage,
  input  coeff_t     tw [POINTS/2],
  input  coeff_t     q,
  output logic       out_valid,
  output coeff_t     out_data [POINTS]
);
  localparam int LOGP = $clog2(POINTS);

  coeff_t stage_in  [LOGP][POINTS];
  coeff_t stage_out [LOGP][POINTS];
  coeff_t stage_q   [LOGP][POINTS];
  logic   vld_in    [LOGP];
  logic   vld_q     [LOGP];

  for (genvar s = 0; s < LOGP; s++) begin : g_stage
    localparam int H = POINTS >> (s + 1);
    // entrance multiplexer in front of stage s
    always_comb begin
      if (s == 0) begin
        stage_in[s] = in_data;
        vld_in[s]   = in_valid && (entrance == 3'(s));
      end else if (entrance == 3'(s)) begin
        stage_in[s] = in_data;
        vld_in[s]   = in_valid;
      end else begin
        stage_in[s] = stage_q[(s > 0) ? s - 1 : 0];
        vld_in[s]   = vld_q[(s > 0) ? s - 1 : 0] && (entrance < 3'(s));
      end
    end
    for (genvar k = 0; k < POINTS / 2; k++) begin : g_bf
      localparam int J   = k % H;
      localparam int TOP = (k / H) * 2 * H + J;
      ntt_butterfly u_bf (
        .a    (stage_in[s][TOP]),
        .b    (stage_in[s][TOP + H]),
        .w    (tw[J << s]),
        .q    (q),
        .x_out(stage_out[s][TOP]),
        .y_out(stage_out[s][TOP + H])
      );
    end
    always_ff @(posedge clk) begin
      stage_q[s] <= stage_out[s];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld_q[s] <= 1'b0;
      else        vld_q[s] <= vld_in[s];
    end
  end

  always_comb begin
    out_data  = stage_q[0];
    out_valid = 1'b0;
    for (int s = 0; s < LOGP; s++) begin
      if (exit_stage == 3'(s)) begin
        out_data  = stage_q[s];
        out_valid = vld_q[s];
      end
    end
  end
endmodule
