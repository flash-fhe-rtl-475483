// tb_ntt_pipeline: runs a complete four-step NTT through the 256-lane
// (i)NTT pipeline.  Each 32-lane group holds one independent 1024-point
// polynomial as a 32x32 matrix.  Pass 1: 32-point column NTTs (entrance 3),
// twisting-factor multiplication, 32x32 transpose (exit E4).  Pass 2: the
// pass-1 output fed back as 32-point NTTs only.  The result is compared
// with a direct 1024-point DFT over Z_12289.  A bypass pass (no NTT, x*c,
// no transpose) is also checked, and the pass latencies are counted.
module tb_ntt_pipeline;
  import fhe_pkg::*;
  localparam int P = 256, G = 32, N = 1024;
  logic clk = 0, rst_n = 0, sync = 0, in_valid = 0, out_valid;
  coeff_t in_data [P], out_data [P], tw [P/2], step [P], scalar, q;
  pass_cfg_t cfg;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  ntt_pipeline #(.POINTS(P)) dut (.*);

  function automatic longint powm(longint b, longint e, longint m);
    longint r = 1; b = b % m;
    while (e > 0) begin if (e[0]) r = (r * b) % m; b = (b * b) % m; e = e >> 1; end
    return r;
  endfunction
  function automatic int br5(int x);
    int r = 0;
    for (int i = 0; i < 5; i++) if (x[i]) r |= 1 << (4 - i);
    return r;
  endfunction

  coeff_t poly [P/G][N];
  coeff_t outr [$][P];
  coeff_t mid  [G][P];
  longint w, wpow [N];
  int t0, lat;

  task automatic run_pass(input coeff_t rows [G][P], input int nrows);
    outr.delete();
    @(negedge clk);
    t0 = cyc; lat = -1;
    for (int t = 0; t < nrows; t++) begin
      in_data = rows[t]; in_valid = 1; sync = (t == 0);
      @(negedge clk);
    end
    in_valid = 0; sync = 0;
    repeat (60) @(negedge clk);
  endtask
  always @(posedge clk) if (rst_n && out_valid) begin
    if (lat < 0) lat = cyc - t0;
    outr.push_back(out_data);
  end

  initial begin
    coeff_t rows [G][P];
    longint acc;
    q = 12289;
    for (longint g = 2; g < 200; g++) begin
      w = powm(g, (q - 1) / N, q);
      if (powm(w, N / 2, q) == q - 1) break;
    end
    for (int k = 0; k < N; k++) wpow[k] = powm(w, k, q);
    for (int k = 0; k < P/2; k++) tw[k] = coeff_t'(wpow[(4 * k) % N]);  // w_256 = w^4
    for (int r = 0; r < P; r++) step[r] = coeff_t'(wpow[br5(r % G)]);     // w_1024^k2
    scalar = 0;
    cfg = '{entrance: 3, exit_stage: 7, ntt_en: 1, mc_op: MC_TWIST, tr_exit: 4, tr_en: 1, out_sel: OS_TRANSPOSE};
    repeat (2) @(posedge clk); rst_n = 1;
    for (int g = 0; g < P/G; g++) for (int n = 0; n < N; n++) poly[g][n] = coeff_t'($urandom_range(0, 12288));
    // pass 1: row n1 = time, lane n2 of each group
    for (int n1 = 0; n1 < G; n1++) for (int g = 0; g < P/G; g++) for (int n2 = 0; n2 < G; n2++)
      rows[n1][g*G + n2] = poly[g][n1 + G * n2];
    run_pass(rows, G);
    checks++; if (outr.size() != G) failures++;
    checks++; if (lat != 5 + 1 + 36) begin failures++; $display("pass1 latency %0d", lat); end
    for (int t = 0; t < G; t++) mid[t] = outr[t];
    // pass 2: 32-point NTTs, no twist, no transpose
    cfg = '{entrance: 3, exit_stage: 7, ntt_en: 1, mc_op: MC_BYPASS, tr_exit: 4, tr_en: 0, out_sel: OS_TRANSPOSE};
    run_pass(mid, G);
    checks++; if (outr.size() != G) failures++;
    checks++; if (lat != 5 + 1) failures++;
    // row t = bitrev(k2), lane bitrev(k1) -> X[k2 + 32 k1]
    for (int g = 0; g < P/G; g++)
      for (int t = 0; t < G; t++)
        for (int l = 0; l < G; l++) begin
          int k;
          k = br5(t) + G * br5(l);
          acc = 0;
          for (int n = 0; n < N; n++) acc = (acc + longint'(poly[g][n]) * wpow[(n * k) % N]) % q;
          checks++;
          if (outr[t][g*G + l] != coeff_t'(acc)) begin
            failures++;
            if (failures < 6) $display("g=%0d k=%0d got %0d exp %0d", g, k, outr[t][g*G + l], acc);
          end
        end
    // bypass pass: only x * scalar, taken at the modular unit
    cfg = '{entrance: 0, exit_stage: 7, ntt_en: 0, mc_op: MC_MUL, tr_exit: 0, tr_en: 0, out_sel: OS_MODCALC};
    scalar = 3;
    run_pass(mid, 4);
    checks++; if (lat != 1) failures++;
    for (int t = 0; t < 4; t++) for (int l = 0; l < P; l++) begin
      checks++; if (outr[t][l] != coeff_t'((longint'(mid[t][l]) * 3) % q)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (4000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
