// mod_calc: modular calculation unit of an (i)NTT pipeline.
//
// Sits between the NTT network and the L1 transpose and applies one
// element-wise operation to every lane of the vector passing through:
//   MC_BYPASS  y = x
//   MC_ADD     y = x + scalar  (mod q)
//   MC_SUB     y = x - scalar  (mod q)
//   MC_MUL     y = x * scalar  (mod q), e.g. the 1/n scaling of an iNTT
//   MC_TWIST   y = x * t_r     (mod q), then t_r <- t_r * step_r
// MC_TWIST is the twisting-factor multiplication of the four-step NTT: for
// lane r and the c-th vector of a pass the factor is step_r^c, which is
// w_N^(r*c) when step_r = w_N^r.  The factors are generated on the fly and
// restart at 1 at the start of a pass.
//
// Timing: one register, latency 1 cycle, one vector per cycle.
//
// The paper names this "multiplication circuit" and "Modular Mul/Add"
// without giving its insides; the operation set and the on-the-fly factor
// generation are this design's choice.
//
// `sync` marks the first vector of a pass: that vector is multiplied by 1
// and the factors restart from there.  `sync` without a vector just resets
// the factors to 1.
module mod_calc
  import fhe_pkg::*;
#(
  parameter int LANES = 256
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   sync,
  input  logic   in_valid,
  input  coeff_t in_data [LANES],
  input  mc_op_e op,
  input  coeff_t scalar,
  input  coeff_t step [LANES],
  input  coeff_t q,
  output logic   out_valid,
  output coeff_t out_data [LANES]
);
  coeff_t twist [LANES];      // factor for the next vector, per lane
  coeff_t cur   [LANES];      // factor for this vector
  coeff_t prod  [LANES];      // x * (scalar or factor)
  coeff_t tnext [LANES];      // factor * step
  coeff_t res   [LANES];

  for (genvar r = 0; r < LANES; r++) begin : g_lane
    coeff_t mul_b;
    assign cur[r] = sync ? coeff_t'(1) : twist[r];
    assign mul_b  = (op == MC_TWIST) ? cur[r] : scalar;
    mod_mul #(.W(W)) u_mul  (.a(in_data[r]), .b(mul_b),   .q(q), .y(prod[r]));
    mod_mul #(.W(W)) u_step (.a(cur[r]),     .b(step[r]), .q(q), .y(tnext[r]));
    always_comb begin
      unique case (op)
        MC_ADD:           res[r] = add_mod(in_data[r], scalar, q);
        MC_SUB:           res[r] = sub_mod(in_data[r], scalar, q);
        MC_MUL, MC_TWIST: res[r] = prod[r];
        default:          res[r] = in_data[r];
      endcase
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                      twist[r] <= coeff_t'(1);
      else if (in_valid && op == MC_TWIST) twist[r] <= tnext[r];
      else if (sync)                       twist[r] <= coeff_t'(1);
    end
    always_ff @(posedge clk) out_data[r] <= res[r];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
