// tb_ntt_network: self-checking test of the multi-entrance/multi-exit NTT
// network at its full 256-point size.
//
// A primitive 256-th root of unity modulo the prime q = 7681 is searched at
// run time.  For every entrance s the network must return, in each group of
// n = 256/2^s lanes, the n-point DFT over Z_q of that group (computed here
// directly from the definition, in bit-reversed order).  A single-stage exit
// (entrance 0, exit 0) is checked against the closed form of the first
// butterfly column.  The latency exit-entrance+1 is checked on every vector.
module tb_ntt_network;
  import fhe_pkg::*;
  localparam int P = 256, LOGP = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  coeff_t in_data [P], out_data [P], tw [P/2], q;
  logic [2:0] entrance, exit_stage;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ntt_network #(.POINTS(P)) dut (.*);

  function automatic longint powm(longint b, longint e, longint m);
    longint r = 1; b = b % m;
    while (e > 0) begin if (e[0]) r = (r * b) % m; b = (b * b) % m; e = e >> 1; end
    return r;
  endfunction
  function automatic int bitrev(int x, int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) if (x[i]) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  coeff_t x [P];
  longint w;
  initial begin
    int n, lat, cyc;
    longint acc, wn, e;
    q = 7681;
    for (longint g = 2; g < 100; g++) begin
      w = powm(g, (q - 1) / P, q);
      if (powm(w, P / 2, q) == q - 1) break;
    end
    for (int k = 0; k < P/2; k++) tw[k] = coeff_t'(powm(w, k, q));
    entrance = 0; exit_stage = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int s = 0; s < LOGP; s++) begin
      for (int rep = 0; rep < 2; rep++) begin
        for (int i = 0; i < P; i++) x[i] = coeff_t'($urandom_range(0, 7680));
        @(negedge clk);
        entrance = 3'(s); exit_stage = 3'(LOGP - 1);
        in_data = x; in_valid = 1;
        @(negedge clk); in_valid = 0;
        cyc = 1;
        while (!out_valid && cyc < 50) begin @(negedge clk); cyc++; end
        lat = LOGP - s;
        checks++; if (cyc != lat) begin failures++; $display("latency s=%0d got %0d exp %0d", s, cyc, lat); end
        n = P >> s;
        wn = powm(w, P / n, q);
        for (int g0 = 0; g0 < P; g0 += n)
          for (int k = 0; k < n; k++) begin
            acc = 0;
            for (int i = 0; i < n; i++) begin
              e = (longint'(i) * k) % n;
              acc = (acc + longint'(x[g0 + i]) * powm(wn, e, q)) % q;
            end
            checks++;
            if (out_data[g0 + bitrev(k, LOGP - s)] != coeff_t'(acc)) begin
              failures++;
              if (failures < 10) $display("s=%0d group %0d k=%0d got %0d exp %0d", s, g0, k, out_data[g0 + bitrev(k, LOGP - s)], acc);
            end
          end
      end
    end
    // single stage exit: entrance 0, exit 0
    for (int i = 0; i < P; i++) x[i] = coeff_t'($urandom_range(0, 7680));
    @(negedge clk);
    entrance = 0; exit_stage = 0; in_data = x; in_valid = 1;
    @(negedge clk); in_valid = 0;
    checks++; if (!out_valid) failures++;
    for (int i = 0; i < P/2; i++) begin
      checks += 2;
      if (out_data[i] != coeff_t'((longint'(x[i]) + x[i + P/2]) % q)) failures++;
      if (out_data[i + P/2] != coeff_t'(((longint'(x[i]) - x[i + P/2] + q) % q) * powm(w, i, q) % q)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
