// l2_mover: sequencer for row transfers between the L2 cache and the L1
// caches.
//
//   load  (is_store = 0): L2 rows src..src+rows-1 are read, one per cycle,
//         and handed to the data distributor as columns 0..rows-1 with L1
//         base row dst, in the distributor mode of the running task;
//   store (is_store = 1): rows src.. of affiliation `aff` (its
//         bootstrappable row when `boot`, else partition `part`) are read
//         and written to L2 rows dst...
// `busy` is high from the cycle after `start` until two cycles after the
// last row, so the distributor's register has drained.
// This sequencing is this design's; the paper describes only the data
// distribution rule.
module l2_mover
  import fhe_pkg::*;
#(
  parameter int L2AW = 18,
  parameter int LAW  = L1_AW
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        is_store,
  input  logic        mode,
  input  logic [2:0]  aff,
  input  logic        boot,
  input  logic [1:0]  part,
  input  logic [AW-1:0] src,
  input  logic [AW-1:0] dst,
  input  logic [15:0] rows,
  output logic        busy,
  // L2 cache
  output logic        l2_rd_en,
  output logic [L2AW-1:0] l2_rd_addr,
  input  coeff_t [ROW_LANES-1:0] l2_rd_data,
  output logic        l2_wr_en,
  output logic [L2AW-1:0] l2_wr_addr,
  output coeff_t [ROW_LANES-1:0] l2_wr_data,
  // data distributor
  output logic        dd_valid,
  output logic        dd_mode,
  output logic [2:0]  dd_aff,
  output logic [15:0] dd_col,
  output logic [LAW-1:0] dd_base,
  output coeff_t [ROW_LANES-1:0] dd_data,
  // affiliation store reads
  output logic [NAFF-1:0] st_rd_en,
  output logic        st_boot,
  output logic [1:0]  st_part,
  output logic [LAW-1:0] st_rd_addr,
  input  coeff_t [ROW_LANES-1:0] st_rd_data
);
  typedef enum logic [1:0] {M_IDLE, M_RUN, M_TAIL} state_e;
  state_e state;
  logic        sto, md, bt;
  logic [2:0]  af;
  logic [1:0]  pt;
  logic [AW-1:0] s_a, d_a;
  logic [15:0] n, cnt, cnt_q;
  logic        rv;
  logic [1:0]  tail;
  logic        issue;

  assign busy    = (state != M_IDLE);
  assign issue   = (state == M_RUN) && (cnt < n);
  assign l2_rd_en   = issue && !sto;
  assign l2_rd_addr = L2AW'(s_a + AW'(cnt));
  always_comb begin
    st_rd_en = '0;
    st_rd_en[af] = issue && sto;
  end
  assign st_boot    = bt;
  assign st_part    = pt;
  assign st_rd_addr = LAW'(s_a + AW'(cnt));
  assign dd_valid   = rv && !sto;
  assign dd_mode    = md;
  assign dd_aff     = af;
  assign dd_col     = cnt_q;
  assign dd_base    = LAW'(d_a);
  assign dd_data    = l2_rd_data;
  assign l2_wr_en   = rv && sto;
  assign l2_wr_addr = L2AW'(d_a + AW'(cnt_q));
  assign l2_wr_data = st_rd_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= M_IDLE; sto <= 1'b0; md <= 1'b0; bt <= 1'b0; af <= '0; pt <= '0;
      s_a <= '0; d_a <= '0; n <= '0; cnt <= '0; cnt_q <= '0; rv <= 1'b0; tail <= '0;
    end else begin
      rv    <= issue;
      cnt_q <= cnt;
      unique case (state)
        M_IDLE: if (start) begin
          sto <= is_store; md <= mode; bt <= boot; af <= aff; pt <= part;
          s_a <= src; d_a <= dst; n <= rows; cnt <= '0; tail <= 2'd2;
          state <= M_RUN;
        end
        M_RUN: begin
          if (issue) cnt <= cnt + 16'd1;
          else state <= M_TAIL;
        end
        default: begin
          if (tail == 2'd0) state <= M_IDLE;
          else tail <= tail - 2'd1;
        end
      endcase
    end
  end
endmodule
