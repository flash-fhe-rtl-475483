// ntt_butterfly: Gentleman-Sande butterfly of the NTT network.
//
//   x_out = (a + b) mod q
//   y_out = ((a - b) mod q) * w mod q
//
// Combinational.  The (+) and (-) nodes are those drawn in the paper's NTT
// figures; placing the twiddle multiply on the difference output is this
// design's choice (decimation in frequency).
module ntt_butterfly
  import fhe_pkg::*;
(
  input  coeff_t a,
  input  coeff_t b,
  input  coeff_t w,
  input  coeff_t q,
  output coeff_t x_out,
  output coeff_t y_out
);
  coeff_t diff;
  always_comb begin
    x_out = add_mod(a, b, q);
    diff  = sub_mod(a, b, q);
  end
  mod_mul #(.W(W)) u_mul (.a(diff), .b(w), .q(q), .y(y_out));
endmodule
