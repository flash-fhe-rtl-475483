// tb_cluster_affiliation: one affiliation with a reduced L1 depth (256 rows
// per partition; depth does not change the logic).  The test
//   - writes twiddle tables and 8 input rows per partition through the
//     data-distributor port;
//   - loads the twiddles into all three clusters with one command;
//   - runs 128-point NTTs (entrance 1, exit 7) on all three clusters in lock
//     step, first writing locally, then through the L2 transpose, and checks
//     every partition against a direct DFT; for the L2 transpose the result
//     lane L of partition P must be lane (128P+L)/4 of cluster (128P+L)%4;
//   - runs the bootstrappable cluster alone with the L3 route and checks the
//     rows leaving on the L3 port, then writes rows in through the L3 input
//     port and reads them back through the store-read port.
module tb_cluster_affiliation;
  import fhe_pkg::*;
  localparam int DEPTH = 256, LAW = 8, PL = PART_LANES;
  localparam coeff_t Q = 7681, W256 = 2028;
  logic clk = 0, rst_n = 0, cmd_valid = 0, busy;
  logic [2:0] clu_mask;
  ccmd_t cmd;
  logic [NPART-1:0] dd_wr_part = '0;
  logic [LAW-1:0] dd_wr_addr, st_rd_addr, l3o_addr, l3i_addr;
  coeff_t [ROW_LANES-1:0] dd_wr_data, st_rd_data, l3o_data, l3i_data;
  logic st_rd_en = 0, st_boot = 0, l3o_valid, l3i_valid = 0;
  logic [1:0] st_part = 0;
  coeff_t inrow [NPART][8][PL];
  coeff_t l3seen [8][ROW_LANES];
  int n_l3o = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  cluster_affiliation #(.DEPTH(DEPTH)) dut (.*);

  always @(posedge clk) if (l3o_valid) begin
    if (n_l3o < 8) for (int i = 0; i < ROW_LANES; i++) l3seen[n_l3o][i] = l3o_data[i];
    n_l3o++;
  end

  function automatic coeff_t mm(coeff_t a, coeff_t b);
    return coeff_t'((64'(a) * 64'(b)) % 64'(Q));
  endfunction
  function automatic coeff_t pw(coeff_t b, int e);
    coeff_t r = 1;
    for (int i = 0; i < e; i++) r = mm(r, b);
    return r;
  endfunction
  function automatic int brev7(int v);
    int r = 0;
    for (int i = 0; i < 7; i++) r |= ((v >> i) & 1) << (6 - i);
    return r;
  endfunction
  // 128-point NTT of inrow[p][r], output in bit-reversed order
  function automatic void ntt128(int p, int r, output coeff_t o [PL]);
    coeff_t w = pw(W256, 2);
    for (int k = 0; k < PL; k++) begin
      coeff_t acc = 0, t = 1, wk = pw(w, k);
      for (int n = 0; n < PL; n++) begin
        acc = coeff_t'((64'(acc) + 64'(mm(inrow[p][r][n], t))) % 64'(Q));
        t = mm(t, wk);
      end
      o[brev7(k)] = acc;
    end
  endfunction

  task automatic dd_write(input logic [NPART-1:0] parts, input int addr, input coeff_t [ROW_LANES-1:0] d);
    @(negedge clk); dd_wr_part = parts; dd_wr_addr = LAW'(addr); dd_wr_data = d;
    @(negedge clk); dd_wr_part = '0;
  endtask
  task automatic read_part(input int p, input int addr, output coeff_t [ROW_LANES-1:0] d);
    @(negedge clk); st_rd_en = 1; st_boot = 0; st_part = 2'(p); st_rd_addr = LAW'(addr);
    @(negedge clk); st_rd_en = 0; d = st_rd_data;
  endtask
  task automatic issue(input logic [2:0] m, input ccmd_t c);
    @(negedge clk); cmd = c; clu_mask = m; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    checks++; if (!busy) failures++;
    while (busy) @(negedge clk);
  endtask
  function automatic ccmd_t mk(ckind_e k, route_e rt, int src, int dst, int rows);
    ccmd_t c = '0;
    c.kind = k; c.ldsel = LD_TWIDDLE; c.route = rt; c.src = AW'(src); c.dst = AW'(dst);
    c.rows = 16'(rows); c.q = Q;
    c.cfg.ntt_en = 1'b1; c.cfg.entrance = 3'd1; c.cfg.exit_stage = 3'd7;
    c.cfg.mc_op = MC_BYPASS; c.cfg.out_sel = OS_MODCALC;
    return c;
  endfunction

  initial begin
    coeff_t [ROW_LANES-1:0] d;
    coeff_t o [PL];
    coeff_t ref0 [NPART][8][PL];
    repeat (3) @(posedge clk); rst_n = 1;
    // twiddles: w256^k in partitions 0/1, w128^k in partitions 2/3
    d = '0;
    for (int k = 0; k < 128; k++) d[k] = pw(W256, k);
    dd_write(4'b0011, 0, d);
    d = '0;
    for (int k = 0; k < 64; k++) d[k] = pw(W256, 2 * k);
    dd_write(4'b1100, 0, d);
    // 8 random input rows per partition
    for (int r = 0; r < 8; r++)
      for (int p = 0; p < NPART; p++) begin
        for (int l = 0; l < PL; l++) inrow[p][r][l] = coeff_t'($urandom_range(0, Q - 1));
        d = '0;
        for (int l = 0; l < PL; l++) d[(p == 1 ? PL : 0) + l] = inrow[p][r][l];
        dd_write(4'(1 << p), 10 + r, d);
      end
    for (int p = 0; p < NPART; p++)
      for (int r = 0; r < 8; r++) begin
        ntt128(p, r, o);
        for (int l = 0; l < PL; l++) ref0[p][r][l] = o[l];
      end

    issue(3'b111, mk(CK_LOAD, RT_LOCAL, 0, 0, 1));
    // local writes
    issue(3'b111, mk(CK_PASS, RT_LOCAL, 10, 100, 8));
    for (int p = 0; p < NPART; p++)
      for (int r = 0; r < 8; r++) begin
        read_part(p, 100 + r, d);
        for (int l = 0; l < PL; l++) begin
          checks++; if (d[l] != ref0[p][r][l]) failures++;
        end
      end
    // through the L2 transpose
    issue(3'b111, mk(CK_PASS, RT_L2T, 10, 150, 8));
    for (int p = 0; p < NPART; p++)
      for (int r = 0; r < 8; r++) begin
        read_part(p, 150 + r, d);
        for (int l = 0; l < PL; l++) begin
          int g;
          g = PL * p + l;
          checks++; if (d[l] != ref0[g % NPART][r][g / NPART]) failures++;
        end
      end
    // L3 route: rows leave the affiliation, nothing is written locally
    issue(3'b001, mk(CK_PASS, RT_L3T, 10, 200, 8));
    checks++; if (n_l3o != 8) failures++;
    for (int r = 0; r < 8; r++)
      for (int l = 0; l < ROW_LANES; l++) begin
        checks++; if (l3seen[r][l] != ref0[l / PL][r][l % PL]) failures++;
      end
    // L3 input port writes partitions 0 and 1
    for (int l = 0; l < ROW_LANES; l++) d[l] = coeff_t'($urandom);
    @(negedge clk); l3i_valid = 1; l3i_addr = 8'd220; l3i_data = d;
    @(negedge clk); l3i_valid = 0;
    begin
      coeff_t [ROW_LANES-1:0] e0, e1;
      read_part(0, 220, e0);
      read_part(1, 220, e1);
      for (int l = 0; l < PL; l++) begin
        checks += 2;
        if (e0[l] != d[l]) failures++;
        if (e1[l] != d[PL + l]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
