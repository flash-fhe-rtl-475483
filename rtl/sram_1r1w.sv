// sram_1r1w: synchronous memory array with one read and one write per core
// cycle.  It stands for a single-ported SRAM macro run double-pumped at twice
// the core clock, which the paper uses to serve two accesses per cycle.
// Read data appears one cycle after rd_en; a read of the row being written
// in the same cycle returns the old contents.  Contents are not reset.
module sram_1r1w #(
  parameter int WIDTH = 4096,
  parameter int DEPTH = 4096,
  parameter int AWID  = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rd_en,
  input  logic [AWID-1:0]  rd_addr,
  output logic [WIDTH-1:0] rd_data,
  input  logic             wr_en,
  input  logic [AWID-1:0]  wr_addr,
  input  logic [WIDTH-1:0] wr_data
);
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end
endmodule
