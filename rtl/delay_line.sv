// delay_line: DEPTH-cycle shift register for one W-bit word (DEPTH >= 1).
// Used for the per-lane delays of the L1 transpose building block.  The
// contents are not reset; the surrounding logic tracks validity.
module delay_line #(
  parameter int W     = 32,
  parameter int DEPTH = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  logic [W-1:0] sr [DEPTH];
  always_ff @(posedge clk) begin
    sr[0] <= d;
    for (int i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
  end
  assign q = sr[DEPTH-1];
endmodule
