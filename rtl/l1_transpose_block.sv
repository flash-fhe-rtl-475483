// l1_transpose_block: 32-port streaming matrix transpose building block of
// the L1 transpose.
//
// A DxD matrix (D = 2, 4, 8, 16 or 32) enters one row per cycle on ports
// 0..D-1 and leaves one column per cycle; 32/D matrices placed side by side
// on the 32 ports are transposed at the same time.  The block has five
// switching stages.  Stage j (b = 2^j) works on port pairs (p, p+b) with bit
// j of p clear:
//   1. ports with bit j set are delayed b cycles,
//   2. the pair is swapped when bit j of the row counter cnt (delayed to this
//      stage's timing by the "D" copies) is 1,
//   3. ports with bit j clear are delayed b cycles,
//   4. a register ends the stage.
// After stage j every 2^(j+1) x 2^(j+1) diagonal block of the stream is
// transposed, so the output multiplexer picks the stage that matches D
// (exit_stage = log2(D) - 1, the E0..E4 taps).  The delays before the swaps
// add up to i cycles for port i, which is the input delay the paper
// describes; splitting them per stage and the delays after each swap are
// this design's choices that make every element leave after the same
// latency.
//
// Interface: the row counter restarts at 0 in a cycle with `sync`; a matrix
// must start in a cycle where cnt is a multiple of D and send its rows on
// consecutive cycles.  Ports D..31 of each D-wide group carry other
// matrices.  Latency for exit stage e: 2^(e+1) - 1 + (e+1) cycles.  A new
// row is accepted every cycle.
module l1_transpose_block
  import fhe_pkg::*;
#(
  parameter int PORTS = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sync,
  input  logic       in_valid,
  input  coeff_t     in_data [PORTS],
  input  logic [2:0] exit_stage,
  output logic       out_valid,
  output coeff_t     out_data [PORTS]
);
  localparam int STAGES = $clog2(PORTS);
  localparam int MAXLAT = (1 << STAGES) - 1 + STAGES;
  localparam int CW     = STAGES;

  // ---- cnt and its delayed copies -------------------------------------
  logic [CW-1:0] cnt_q, tag;
  logic [CW-1:0] tag_d [MAXLAT + 1];
  logic          val_d [MAXLAT + 1];
  always_comb tag = sync ? '0 : cnt_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt_q <= '0;
    else        cnt_q <= tag + 1'b1;
  end
  always_comb begin
    tag_d[0] = tag;
    val_d[0] = in_valid;
  end
  for (genvar k = 1; k <= MAXLAT; k++) begin : g_d
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin tag_d[k] <= '0; val_d[k] <= 1'b0; end
      else begin tag_d[k] <= tag_d[k-1]; val_d[k] <= val_d[k-1]; end
    end
  end

  // ---- switching stages ----------------------------------------------
  coeff_t st_in [STAGES][PORTS];
  coeff_t pre   [STAGES][PORTS];
  coeff_t mx    [STAGES][PORTS];
  coeff_t post  [STAGES][PORTS];
  coeff_t st_q  [STAGES][PORTS];

  for (genvar j = 0; j < STAGES; j++) begin : g_st
    localparam int B   = 1 << j;
    localparam int OFF = (1 << j) - 1 + j;     // stage input time offset
    logic swap;
    assign swap = tag_d[OFF][j];
    if (j == 0) begin : g_first
      assign st_in[j] = in_data;
    end else begin : g_next
      assign st_in[j] = st_q[j-1];
    end
    for (genvar p = 0; p < PORTS; p++) begin : g_p
      if (((p >> j) & 1) == 1) begin : g_hi
        delay_line #(.W(W), .DEPTH(B)) u_pre (.clk(clk), .d(st_in[j][p]), .q(pre[j][p]));
        assign mx[j][p]   = swap ? pre[j][p - B] : pre[j][p];
        assign post[j][p] = mx[j][p];
      end else begin : g_lo
        assign pre[j][p]  = st_in[j][p];
        assign mx[j][p]   = swap ? pre[j][p + B] : pre[j][p];
        delay_line #(.W(W), .DEPTH(B)) u_post (.clk(clk), .d(mx[j][p]), .q(post[j][p]));
      end
    end
    always_ff @(posedge clk) st_q[j] <= post[j];
  end

  // ---- output multiplexer (E0..E4) ------------------------------------
  always_comb begin
    out_data  = st_q[STAGES-1];
    out_valid = val_d[MAXLAT];
    for (int e = 0; e < STAGES; e++) begin
      if (exit_stage == 3'(e)) begin
        out_data  = st_q[e];
        out_valid = val_d[(2 << e) - 1 + e + 1];
      end
    end
  end
endmodule
