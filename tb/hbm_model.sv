// hbm_model: behavioural model of the off-chip memory behind the memory
// controller, for testbenches only.  Accepts a request when `ready` (which
// drops pseudo-randomly to exercise back-pressure), answers reads in order
// LAT cycles later, and keeps rows in a sparse array (unwritten rows read
// as a function of their address).
module hbm_model
  import fhe_pkg::*;
#(
  parameter int LAT = 4
) (
  input  logic        clk,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        req_we,
  input  logic [31:0] req_addr,
  input  coeff_t [ROW_LANES-1:0] req_wdata,
  output logic        rsp_valid,
  output coeff_t [ROW_LANES-1:0] rsp_rdata
);
  coeff_t [ROW_LANES-1:0] mem [int unsigned];
  logic   pv [LAT];
  coeff_t [ROW_LANES-1:0] pd [LAT];
  int     accepted = 0;

  function automatic coeff_t [ROW_LANES-1:0] row_at(logic [31:0] a);
    coeff_t [ROW_LANES-1:0] r;
    if (mem.exists(a)) return mem[a];
    for (int i = 0; i < ROW_LANES; i++) r[i] = coeff_t'((a * 977 + i * 131) % 7681);
    return r;
  endfunction

  initial for (int i = 0; i < LAT; i++) pv[i] = 1'b0;
  always @(posedge clk) begin
    req_ready <= ($urandom_range(0, 3) != 0);
    for (int i = LAT - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= req_valid && req_ready && !req_we;
    if (req_valid && req_ready) begin
      accepted++;
      if (req_we) mem[req_addr] = req_wdata;
      else pd[0] <= row_at(req_addr);
    end
  end
  assign rsp_valid = pv[LAT-1];
  assign rsp_rdata = pd[LAT-1];
endmodule
