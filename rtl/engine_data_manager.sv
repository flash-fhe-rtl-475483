// engine_data_manager: moves blocks of rows between off-chip memory (through
// the memory controller) and the L2 cache.
//
//   load  (op_store = 0): rows haddr..haddr+rows-1 of memory are read and
//         written to L2 rows l2addr..;  read requests are issued back to
//         back as long as mem_req_ready is high, responses return in order.
//   store (op_store = 1): L2 rows l2addr.. are read (one cycle) and written
//         to memory rows haddr.., one request per row held until accepted.
// `busy` is high from the cycle after `start` until the last row is done.
// Memory interface: valid/ready request channel (we, row address, 1 KB
// data) and a response channel with no back-pressure.
//
// The paper only names this block ("Engine Data Manager"); it is realised
// here as a simple DMA engine.
module engine_data_manager
  import fhe_pkg::*;
#(
  parameter int L2AW = 18
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        op_store,
  input  logic [31:0] haddr,
  input  logic [L2AW-1:0] l2addr,
  input  logic [15:0] rows,
  output logic        busy,
  // memory controller
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic        mem_req_we,
  output logic [31:0] mem_req_addr,
  output coeff_t [ROW_LANES-1:0] mem_req_wdata,
  input  logic        mem_rsp_valid,
  input  coeff_t [ROW_LANES-1:0] mem_rsp_rdata,
  // L2 cache
  output logic        l2_rd_en,
  output logic [L2AW-1:0] l2_rd_addr,
  input  coeff_t [ROW_LANES-1:0] l2_rd_data,
  output logic        l2_wr_en,
  output logic [L2AW-1:0] l2_wr_addr,
  output coeff_t [ROW_LANES-1:0] l2_wr_data
);
  typedef enum logic [1:0] {E_IDLE, E_LOAD, E_SREAD, E_SWRITE} state_e;
  state_e state;
  logic [31:0] ha;
  logic [L2AW-1:0] la;
  logic [15:0] n, req_cnt, rsp_cnt;
  coeff_t [ROW_LANES-1:0] buf_q;
  logic        rd_q;

  assign busy          = (state != E_IDLE);
  assign mem_req_valid = (state == E_LOAD && req_cnt < n) || (state == E_SWRITE);
  assign mem_req_we    = (state == E_SWRITE);
  assign mem_req_addr  = ha + 32'(req_cnt);
  assign mem_req_wdata = rd_q ? l2_rd_data : buf_q;
  assign l2_rd_en      = (state == E_SREAD);
  assign l2_rd_addr    = la + L2AW'(req_cnt);
  assign l2_wr_en      = (state == E_LOAD) && mem_rsp_valid;
  assign l2_wr_addr    = la + L2AW'(rsp_cnt);
  assign l2_wr_data    = mem_rsp_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= E_IDLE; ha <= '0; la <= '0; n <= '0;
      req_cnt <= '0; rsp_cnt <= '0; rd_q <= 1'b0;
    end else begin
      rd_q <= l2_rd_en;
      unique case (state)
        E_IDLE: if (start) begin
          ha <= haddr; la <= l2addr; n <= rows;
          req_cnt <= '0; rsp_cnt <= '0;
          state <= (rows == 16'd0) ? E_IDLE : (op_store ? E_SREAD : E_LOAD);
        end
        E_LOAD: begin
          if (mem_req_valid && mem_req_ready) req_cnt <= req_cnt + 16'd1;
          if (mem_rsp_valid) begin
            rsp_cnt <= rsp_cnt + 16'd1;
            if (rsp_cnt == n - 16'd1) state <= E_IDLE;
          end
        end
        E_SREAD: state <= E_SWRITE;
        default: if (mem_req_ready) begin
          req_cnt <= req_cnt + 16'd1;
          state   <= (req_cnt == n - 16'd1) ? E_IDLE : E_SREAD;
        end
      endcase
    end
  end
  always_ff @(posedge clk) if (rd_q) buf_q <= l2_rd_data;
endmodule
