// mod_mul: modular multiplier, y = (a * b) mod q.
//
// This is the "Modular Mul" unit used throughout the accelerator: in every
// NTT butterfly, in the modular calculation unit and in the BConv module.
// It is purely combinational; the instantiating pipeline registers it.
// The inputs must be reduced (a, b < q) and q must be below 2^(W-1).
// The paper names the unit but not its algorithm; this design reduces the
// full 2W-bit product with a remainder operator, which a synthesis tool maps
// to a constant-latency reduction circuit.
module mod_mul #(
  parameter int W = 32
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] q,
  output logic [W-1:0] y
);
  logic [2*W-1:0] prod;
  always_comb begin
    prod = {{W{1'b0}}, a} * {{W{1'b0}}, b};
    y    = (q == '0) ? '0 : W'(prod % {{W{1'b0}}, q});
  end
endmodule
