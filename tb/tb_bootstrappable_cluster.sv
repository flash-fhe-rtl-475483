// tb_bootstrappable_cluster: drives a bootstrappable cluster with a model
// of its two L1 partitions (256-lane rows, one-cycle read) and checks:
//   - configuration loads (twiddle table, BConv constants, partial sums);
//   - a full 256-point NTT of 8 rows (q = 7681, w = 2028 a primitive 256th
//     root), against a direct DFT in bit-reversed order;
//   - entrance at stage 1, which runs two 128-point NTTs per row;
//   - a bypass pass (NTT off, modular multiply by a scalar);
//   - BConv of 8 rows, packed into one result row, with and without the
//     final addition of partial sums;
//   - pipeline timing: the first result is written 2 + (exit-entrance+1) + 1
//     cycles after the command is taken, and then one row per cycle.
module tb_bootstrappable_cluster;
  import fhe_pkg::*;
  localparam int P = 256, LAW = 12;
  localparam coeff_t Q = 7681, WR = 2028;
  logic clk = 0, rst_n = 0, cmd_valid = 0, busy, rd_en, wr_en;
  ccmd_t cmd;
  logic [LAW-1:0] rd_addr, wr_addr;
  coeff_t [P-1:0] rd_data, wr_data;
  route_e wr_route;
  coeff_t [P-1:0] mem [1 << LAW];
  int checks = 0, failures = 0, cyc = 0, t_take, t_first, t_last, nwr;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  bootstrappable_cluster #(.POINTS(P), .LAW(LAW)) dut (.*);

  always @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) begin
      mem[wr_addr] <= wr_data;
      if (nwr == 0) t_first = cyc;
      t_last = cyc; nwr++;
    end
  end

  function automatic coeff_t mm(coeff_t a, coeff_t b);
    return coeff_t'((64'(a) * 64'(b)) % 64'(Q));
  endfunction
  function automatic coeff_t pw(coeff_t b, int e);
    coeff_t r = 1;
    for (int i = 0; i < e; i++) r = mm(r, b);
    return r;
  endfunction
  function automatic int brev(int v, int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) r |= ((v >> i) & 1) << (bits - 1 - i);
    return r;
  endfunction

  task automatic issue(input ccmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1; nwr = 0;
    @(posedge clk); t_take = cyc;
    @(negedge clk); cmd_valid = 0;
    while (busy) @(negedge clk);
  endtask

  function automatic ccmd_t mk(ckind_e k, ldsel_e ls, int src, int dst, int rows);
    ccmd_t c = '0;
    c.kind = k; c.ldsel = ls; c.src = AW'(src); c.dst = AW'(dst); c.rows = 16'(rows);
    c.q = Q; c.route = RT_LOCAL;
    c.cfg.mc_op = MC_BYPASS; c.cfg.out_sel = OS_MODCALC; c.cfg.ntt_en = 1'b1;
    c.cfg.entrance = 3'd0; c.cfg.exit_stage = 3'd7;
    return c;
  endfunction

  // expected NTT of row r entered at stage s (2^s sub-NTTs of P>>s points)
  task automatic check_ntt(input int srcrow, input int dstrow, input int s);
    int m = P >> s, lg = 8 - s;
    coeff_t wm = pw(WR, 1 << s);
    for (int g = 0; g < (1 << s); g++)
      for (int k = 0; k < m; k++) begin
        coeff_t acc = 0, wk = pw(wm, k), t = 1;
        for (int n = 0; n < m; n++) begin
          acc = coeff_t'((64'(acc) + 64'(mm(mem[srcrow][g*m+n], t))) % 64'(Q));
          t = mm(t, wk);
        end
        checks++;
        if (mem[dstrow][g*m + brev(k, lg)] != acc) failures++;
      end
  endtask

  initial begin
    ccmd_t c;
    coeff_t w;
    for (int r = 0; r < (1 << LAW); r++) mem[r] = '0;
    w = 1;
    for (int k = 0; k < P/2; k++) begin mem[0][k] = w; w = mm(w, WR); end
    for (int l = 0; l < LSUB; l++) mem[1][l] = coeff_t'($urandom_range(0, Q-1));
    for (int l = 0; l < P; l++) mem[2][l] = coeff_t'($urandom_range(0, Q-1));
    for (int r = 10; r < 18; r++)
      for (int l = 0; l < P; l++) mem[r][l] = coeff_t'($urandom_range(0, Q-1));
    repeat (3) @(posedge clk); rst_n = 1;

    issue(mk(CK_LOAD, LD_TWIDDLE, 0, 0, 1));
    checks++; if (dut.tw[5] != pw(WR, 5)) failures++;
    issue(mk(CK_LOAD, LD_BCONST, 1, 0, 1));
    issue(mk(CK_LOAD, LD_ACC, 2, 0, 1));

    // full 256-point NTT of 8 rows
    issue(mk(CK_PASS, LD_TWIDDLE, 10, 100, 8));
    for (int r = 0; r < 8; r++) check_ntt(10 + r, 100 + r, 0);
    checks += 3;
    if (nwr != 8) failures++;
    if (t_first - t_take != 2 + 8 + 1) begin
      failures++; $display("latency %0d", t_first - t_take);
    end
    if (t_last - t_first != 7) failures++;

    // entrance at stage 1: two 128-point NTTs per row
    c = mk(CK_PASS, LD_TWIDDLE, 10, 200, 8); c.cfg.entrance = 3'd1;
    issue(c);
    for (int r = 0; r < 8; r++) check_ntt(10 + r, 200 + r, 1);
    checks++; if (t_first - t_take != 2 + 7 + 1) failures++;

    // bypass: NTT off, multiply by a scalar
    c = mk(CK_PASS, LD_TWIDDLE, 10, 250, 4); c.cfg.ntt_en = 1'b0; c.cfg.mc_op = MC_MUL; c.scalar = 1234;
    issue(c);
    for (int r = 0; r < 4; r++)
      for (int l = 0; l < P; l++) begin
        checks++; if (mem[250 + r][l] != mm(mem[10 + r][l], 1234)) failures++;
      end
    checks++; if (t_first - t_take != 2 + 1) failures++;

    // BConv without and with the partial-sum add
    issue(mk(CK_BCONV, LD_TWIDDLE, 10, 300, 8));
    c = mk(CK_BCONV, LD_TWIDDLE, 10, 301, 8); c.acc = 1'b1;
    issue(c);
    for (int r = 0; r < 8; r++) begin
      coeff_t s;
      s = 0;
      for (int l = 0; l < LSUB; l++) s = coeff_t'((64'(s) + 64'(mm(mem[10 + r][l], mem[1][l]))) % 64'(Q));
      checks += 2;
      if (mem[300][r] != s) failures++;
      if (mem[301][r] != coeff_t'((64'(s) + 64'(mem[2][r])) % 64'(Q))) failures++;
    end
    checks++; if (mem[300][8] != 0) failures++;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
