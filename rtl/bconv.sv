// bconv: basis conversion unit of a bootstrappable cluster.
//
// Computes y = (sum_i x_i * k_i) mod q over LSUB = 60 residues: LSUB modular
// multipliers in parallel, a binary tree of ceil(log2 LSUB) levels of
// modular adders, and a last adder that adds acc_in (a partial sum read from
// the L1 cache) when acc_en is set.  x_i are the input residues (already
// multiplied by the inverse CRT factors), k_i the conversion constants
// (q_hat_i mod q) for the target modulus q; all inputs must be below q.
//
// Timing: fully pipelined, one conversion per cycle; registers after the
// multipliers, after every adder level and after the final adder, so the
// latency is ceil(log2 LSUB) + 2 cycles (8 for LSUB = 60).  acc_in and
// acc_en are sampled LAT-1 cycles after the matching x, when the sum reaches
// the final adder.
//
// The structure (multipliers, log l_sub adder tree, final add fed from the
// L1 cache) is the paper's; the register placement is this design's.
module bconv
  import fhe_pkg::*;
#(
  parameter int LSUB = 60
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  coeff_t x [LSUB],
  input  coeff_t k [LSUB],
  input  coeff_t q,
  input  logic   acc_en,
  input  coeff_t acc_in,
  output logic   out_valid,
  output coeff_t y
);
  localparam int LV  = $clog2(LSUB);
  localparam int NP  = 1 << LV;
  localparam int LAT = LV + 2;

  coeff_t prod [LSUB];
  coeff_t lvl  [LV+1][NP];
  logic   vld  [LAT];

  for (genvar i = 0; i < LSUB; i++) begin : g_mul
    mod_mul #(.W(W)) u_mul (.a(x[i]), .b(k[i]), .q(q), .y(prod[i]));
  end
  always_ff @(posedge clk) begin
    for (int i = 0; i < NP; i++) lvl[0][i] <= (i < LSUB) ? prod[i] : '0;
  end
  for (genvar l = 0; l < LV; l++) begin : g_tree
    always_ff @(posedge clk) begin
      for (int i = 0; i < (NP >> (l + 1)); i++)
        lvl[l+1][i] <= add_mod(lvl[l][2*i], lvl[l][2*i+1], q);
      for (int i = (NP >> (l + 1)); i < NP; i++)
        lvl[l+1][i] <= '0;
    end
  end
  always_ff @(posedge clk) begin
    y <= acc_en ? add_mod(lvl[LV][0], acc_in, q) : lvl[LV][0];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < LAT; i++) vld[i] <= 1'b0;
    else begin
      vld[0] <= in_valid;
      for (int i = 1; i < LAT; i++) vld[i] <= vld[i-1];
    end
  end
  assign out_valid = vld[LAT-1];
endmodule
