// cluster_seq: command sequencer shared by the bootstrappable and swift
// clusters.
//
// A command (ccmd_t) names a source row, a destination row and a row count
// in the cluster's L1 partition(s).  The sequencer reads one row per cycle,
// streams it into the datapath and writes every result row back:
//   CK_PASS   rows go through the (i)NTT pipeline; result k goes to dst+k.
//   CK_BCONV  lanes 0..LSUB-1 of each row go through BConv; the scalar
//             results are packed POINTS per row and written to dst, dst+1..
//             With `acc` set, result k is added to lane k of the partial-sum
//             register (loaded with LD_ACC).
//   CK_LOAD   one row at src is loaded into a configuration register: the
//             NTT twiddle table, the twist steps, the BConv constants or the
//             BConv partial sums.
// `busy` rises the cycle after a command is accepted and falls two cycles
// after the last write, so that any cross-cluster transpose stage behind the
// write port has finished too.  Each result row leaves with the command's
// route for the affiliation to steer.
//
// The paper says only that the controller moves data to caches, runs the
// computation and writes results back; this command format and the
// configuration registers are this design's.
module cluster_seq
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
  output ccmd_t       cur,
  // L1 read port
  output logic        rd_en,
  output logic [LAW-1:0] rd_addr,
  input  coeff_t [POINTS-1:0] rd_data,
  // datapath
  output logic        p_sync,
  output logic        p_valid,
  input  logic        p_out_valid,
  input  coeff_t [POINTS-1:0] p_out_data,
  output logic        b_valid,
  output logic        b_acc_en,
  output coeff_t      b_acc_in,
  input  logic        b_out_valid,
  input  coeff_t      b_y,
  // configuration registers
  output coeff_t      tw [POINTS/2],
  output coeff_t      step [POINTS],
  output coeff_t      bconst [NLSUB],
  // L1 write port
  output logic        wr_en,
  output logic [LAW-1:0] wr_addr,
  output coeff_t [POINTS-1:0] wr_data,
  output route_e      wr_route
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_TAIL} state_e;
  state_e state;
  logic [15:0] rd_cnt, out_cnt;
  logic [1:0]  tail;
  logic        rv, rv_first;
  coeff_t      accrow [POINTS];
  coeff_t [POINTS-1:0] pack;
  logic [15:0] nrd;
  logic        last_out;

  assign busy    = (state != S_IDLE);
  assign nrd     = (cur.kind == CK_LOAD) ? 16'd1 : cur.rows;
  assign rd_en   = (state == S_RUN) && (rd_cnt < nrd);
  assign rd_addr = LAW'(cur.src + AW'(rd_cnt));
  assign p_valid = rv && (cur.kind == CK_PASS);
  assign p_sync  = rv && rv_first && (cur.kind == CK_PASS);
  assign b_valid = rv && (cur.kind == CK_BCONV);
  assign b_acc_en = cur.acc;
  // the item reaching BConv's final adder is the next one to leave, i.e.
  // number out_cnt, or out_cnt+1 while item out_cnt leaves in this cycle
  assign b_acc_in = accrow[(out_cnt + 16'(b_out_valid)) % POINTS];

  // result write
  always_comb begin
    wr_en    = 1'b0;
    wr_addr  = LAW'(cur.dst + AW'(out_cnt));
    wr_data  = p_out_data;
    wr_route = cur.route;
    last_out = 1'b0;
    if (state == S_RUN && cur.kind == CK_PASS && p_out_valid) begin
      wr_en    = 1'b1;
      last_out = (out_cnt == cur.rows - 16'd1);
    end
    if (state == S_RUN && cur.kind == CK_BCONV && b_out_valid) begin
      wr_data = pack;
      wr_data[out_cnt % POINTS] = b_y;
      wr_addr  = LAW'(cur.dst + AW'(out_cnt / POINTS));
      last_out = (out_cnt == cur.rows - 16'd1);
      wr_en    = last_out || ((out_cnt % POINTS) == POINTS - 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cur <= '0; rd_cnt <= '0; out_cnt <= '0; tail <= '0;
      rv <= 1'b0; rv_first <= 1'b0;
    end else begin
      rv       <= rd_en;
      rv_first <= rd_en && (rd_cnt == 16'd0);
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          cur <= cmd; rd_cnt <= '0; out_cnt <= '0;
          state <= (cmd.kind != CK_LOAD && cmd.rows == 16'd0) ? S_TAIL : S_RUN;
          tail <= 2'd2;
        end
        S_RUN: begin
          if (rd_en) rd_cnt <= rd_cnt + 16'd1;
          if ((cur.kind == CK_PASS && p_out_valid) || (cur.kind == CK_BCONV && b_out_valid))
            out_cnt <= out_cnt + 16'd1;
          if (last_out || (cur.kind == CK_LOAD && rv)) state <= S_TAIL;
        end
        default: begin
          if (tail == 2'd0) state <= S_IDLE;
          else tail <= tail - 2'd1;
        end
      endcase
    end
  end

  // packing of BConv results and configuration loads
  always_ff @(posedge clk) begin
    if (state == S_RUN && cur.kind == CK_BCONV && b_out_valid) begin
      if (wr_en) pack <= '0;
      else       pack[out_cnt % POINTS] <= b_y;
    end
    if (state == S_IDLE) pack <= '0;
    if (state == S_RUN && cur.kind == CK_LOAD && rv) begin
      unique case (cur.ldsel)
        LD_TWIDDLE: for (int i = 0; i < POINTS/2; i++) tw[i] <= rd_data[i];
        LD_STEP:    for (int i = 0; i < POINTS; i++)   step[i] <= rd_data[i];
        LD_BCONST:  for (int i = 0; i < NLSUB; i++)    bconst[i] <= (i < POINTS) ? rd_data[i % POINTS] : '0;
        default:    for (int i = 0; i < POINTS; i++)   accrow[i] <= rd_data[i];
      endcase
    end
  end
endmodule
