// tb_mod_calc: checks every operation of the modular calculation unit,
// including the twist factors step_r^c over several vectors of a pass and
// their restart on sync, against values computed here with 64-bit integer
// arithmetic.  Latency 1 is checked on every vector.
module tb_mod_calc;
  import fhe_pkg::*;
  localparam int L = 16;
  logic clk = 0, rst_n = 0, sync = 0, in_valid = 0, out_valid;
  coeff_t in_data [L], step [L], out_data [L], scalar, q;
  mc_op_e op;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  mod_calc #(.LANES(L)) dut (.*);

  function automatic longint powm(longint b, longint e, longint m);
    longint r = 1; b = b % m;
    while (e > 0) begin if (e[0]) r = (r * b) % m; b = (b * b) % m; e = e >> 1; end
    return r;
  endfunction

  coeff_t x [L];
  longint e;
  initial begin
    q = 32'd2013265921;  // 15*2^27+1
    op = MC_BYPASS; scalar = 0;
    for (int r = 0; r < L; r++) step[r] = coeff_t'($urandom_range(1, 2000000000) % q);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      mc_op_e o;
      o = mc_op_e'(t % 4);
      for (int r = 0; r < L; r++) x[r] = coeff_t'($urandom % q);
      @(negedge clk);
      op = o; scalar = coeff_t'($urandom % q); in_data = x; in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++; if (!out_valid) failures++;
      for (int r = 0; r < L; r++) begin
        case (o)
          MC_ADD:  e = (longint'(x[r]) + scalar) % q;
          MC_SUB:  e = (longint'(x[r]) - scalar + q) % q;
          MC_MUL:  e = (longint'(x[r]) * scalar) % q;
          default: e = x[r];
        endcase
        checks++; if (out_data[r] != coeff_t'(e)) failures++;
      end
    end
    // twisting over two passes of 6 vectors
    for (int pass = 0; pass < 2; pass++) begin
      @(negedge clk); sync = 1; op = MC_TWIST; @(negedge clk); sync = 0;
      for (int c = 0; c < 6; c++) begin
        for (int r = 0; r < L; r++) x[r] = coeff_t'($urandom % q);
        in_data = x; in_valid = 1;
        @(negedge clk);
        checks++; if (!out_valid) failures++;
        for (int r = 0; r < L; r++) begin
          e = (longint'(x[r]) * powm(step[r], c, q)) % q;
          checks++; if (out_data[r] != coeff_t'(e)) begin failures++; if (failures < 5) $display("twist c=%0d r=%0d", c, r); end
        end
      end
      in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
