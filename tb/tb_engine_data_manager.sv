// tb_engine_data_manager: loads 20 rows from the memory model into a small
// L2 array, stores them to another memory region, and checks both copies,
// with the memory's request channel applying random back-pressure.
module tb_engine_data_manager;
  import fhe_pkg::*;
  localparam int L2AW = 10;
  logic clk = 0, rst_n = 0, start = 0, op_store = 0, busy;
  logic [31:0] haddr;
  logic [L2AW-1:0] l2addr;
  logic [15:0] rows;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  coeff_t [ROW_LANES-1:0] mem_req_wdata, mem_rsp_rdata, l2_rd_data, l2_wr_data;
  logic l2_rd_en, l2_wr_en;
  logic [L2AW-1:0] l2_rd_addr, l2_wr_addr;
  coeff_t [ROW_LANES-1:0] l2 [1 << L2AW];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  engine_data_manager #(.L2AW(L2AW)) dut (.*);
  hbm_model u_hbm (.clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));
  always @(posedge clk) begin
    if (l2_rd_en) l2_rd_data <= l2[l2_rd_addr];
    if (l2_wr_en) l2[l2_wr_addr] <= l2_wr_data;
  end
  task automatic run(input logic st, input logic [31:0] h, input int la, input int n);
    @(negedge clk); start = 1; op_store = st; haddr = h; l2addr = L2AW'(la); rows = 16'(n);
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    run(0, 32'h100, 16, 20);
    for (int k = 0; k < 20; k++) begin
      checks++; if (l2[16 + k] != u_hbm.row_at(32'h100 + k)) failures++;
    end
    run(1, 32'h9000, 16, 20);
    for (int k = 0; k < 20; k++) begin
      checks++;
      if (!u_hbm.mem.exists(32'h9000 + k) || u_hbm.mem[32'h9000 + k] != l2[16 + k]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
