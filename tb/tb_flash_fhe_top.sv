// tb_flash_fhe_top: end-to-end test of the accelerator with two cluster
// affiliations instead of eight (the L3 transpose then has 512 ports,
// port i of bootstrappable cluster j -> port 2i+j, and deep mode spreads
// columns over two affiliations) and smaller L1 and L2 arrays (256 rows
// per L1 partition, 1024 L2 rows; the depth changes no logic), an off-chip memory model with random back-pressure, and an
// instruction stream as a driver would produce it:
//   deep task (log N = 16, low priority): HBM -> L2 -> distributor in deep
//     mode -> both affiliations; twiddle and BConv-constant loads;
//     a 256-point NTT pass on both bootstrappable clusters routed
//     through the L3 transpose; a bypass pass (NTT off, multiply by a
//     scalar); a BConv pass; stores L1 -> L2 -> HBM;
//   shallow task (log N = 13, high priority, queued while the deep task
//     waits): the same data path in shallow mode on affiliations 0 and 1,
//     running side by side, with 128-point NTTs entered at stage 1 of the
//     bootstrappable cluster and routed through the L2 transpose.
// The rows written back to the memory model are compared with a direct
// computation.  Each mechanism (L3 and L2 transpose, bypass, NTT entrance
// decomposition, BConv, parallel shallow tasks, all affiliations busy,
// memory back-pressure, preemption, mode switches, L2 loads and stores, HBM
// loads and stores) is counted, and one that never happens is a failure.

module tb_flash_fhe_top;
  import fhe_pkg::*;
  localparam coeff_t Q = 7681, W256 = 2028;
  logic clk = 0, rst_n = 0, instr_valid = 0, instr_prio = 0, instr_ready;
  instr_t instr;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid, idle;
  logic [31:0] mem_req_addr;
  coeff_t [ROW_LANES-1:0] mem_req_wdata, mem_rsp_rdata;
  logic [1:0] mode;
  logic [15:0] n_deep_tasks, n_shallow_tasks, n_preempt, n_mode_switch;
  int checks = 0, failures = 0, cyc = 0;
  localparam int NA = 2, ALL = (1 << NA) - 1;
  // affiliations whose results are read back, and the two shallow ones
  localparam int A3 = 3 % NA, A2 = 2 % NA, A1 = 1 % NA, S1 = 4 % NA, S2 = 5 % NA;
  always #5 clk = ~clk;

  flash_fhe_top #(.NA(2), .L1_ROWS(256), .L2_ROWS(1024)) dut (.*);
  hbm_model u_hbm (.clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  // ---- mechanism counters ----
  int n_l3t = 0, n_l2t = 0, n_bypass = 0, n_entrance = 0, n_bconv = 0, n_parallel = 0;
  int n_all8 = 0, n_stall = 0, n_l2load = 0, n_l2store = 0, n_hbmload = 0, n_hbmstore = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.l3_out_valid && rst_n) n_l3t++;
    if (dut.g_aff[S1].u_aff.l2_out_valid) n_l2t++;
    if (dut.aff_cmd_valid != '0 && dut.aff_cmd.kind == CK_PASS && !dut.aff_cmd.cfg.ntt_en) n_bypass++;
    if (dut.aff_cmd_valid != '0 && dut.aff_cmd.kind == CK_PASS && dut.aff_cmd.cfg.entrance != 3'd0) n_entrance++;
    if (dut.g_aff[A1].u_aff.u_boot.b_out_valid) n_bconv++;
    if (dut.aff_busy[S1] && dut.aff_busy[S2]) n_parallel++;
    if (&dut.aff_busy) n_all8++;
    if (mem_req_valid && !mem_req_ready) n_stall++;
    if (dut.mv_start && !dut.mv_store) n_l2load++;
    if (dut.mv_start && dut.mv_store) n_l2store++;
    if (dut.edm_start && !dut.edm_store) n_hbmload++;
    if (dut.edm_start && dut.edm_store) n_hbmstore++;
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
  // NTT of m = 2^lg values x[off..off+m-1], bit-reversed output
  function automatic void ntt(const ref coeff_t x [ROW_LANES], input int lg, output coeff_t o [ROW_LANES]);
    int m = 1 << lg;
    coeff_t w = pw(W256, 256 / m);
    for (int k = 0; k < m; k++) begin
      coeff_t acc = 0, t = 1, wk = pw(w, k);
      for (int n = 0; n < m; n++) begin
        acc = coeff_t'((64'(acc) + 64'(mm(x[n], t))) % 64'(Q));
        t = mm(t, wk);
      end
      o[brev(k, lg)] = acc;
    end
  endfunction

  task automatic push(input logic prio, input instr_t i);
    @(negedge clk); instr_valid = 1; instr_prio = prio; instr = i;
    @(posedge clk);
    while (!instr_ready) @(posedge clk);
    #1 instr_valid = 0;
  endtask
  function automatic instr_t ins(opcode_e op, int aff_mask, int clu, int src, int dst, int rows);
    instr_t i = '0;
    i.op = op; i.aff_mask = NAFF'(aff_mask); i.clu_mask = 3'(clu);
    i.c.src = AW'(src); i.c.dst = AW'(dst); i.c.rows = 16'(rows); i.c.q = Q;
    i.c.cfg.ntt_en = 1'b1; i.c.cfg.entrance = 3'd0; i.c.cfg.exit_stage = 3'd7;
    i.c.cfg.mc_op = MC_BYPASS; i.c.cfg.out_sel = OS_MODCALC; i.c.route = RT_LOCAL;
    return i;
  endfunction
  function automatic instr_t task_i(int logn);
    instr_t i = '0;
    i.op = OP_TASK; i.logn = 5'(logn);
    return i;
  endfunction
  function automatic instr_t hbm(opcode_e op, int haddr, int l2, int rows);
    instr_t i = ins(op, 0, 0, l2, l2, rows);
    i.haddr = 32'(haddr);
    return i;
  endfunction

  coeff_t [ROW_LANES-1:0] hrow [64];

  initial begin
    instr_t i;
    coeff_t [ROW_LANES-1:0] r;
    // ---- memory image ----
    r = '0;
    for (int k = 0; k < 128; k++) r[k] = pw(W256, k);
    for (int a = 0; a < NA; a++) u_hbm.mem[a] = r;             // deep twiddles
    u_hbm.mem[32'h100] = r;                                    // shallow: cluster 0
    u_hbm.mem[32'h101] = '0;
    r = '0;
    for (int k = 0; k < 64; k++) r[k] = pw(W256, 2 * k);
    u_hbm.mem[32'h102] = r;                                    // swift clusters
    u_hbm.mem[32'h103] = r;
    r = '0;
    for (int l = 0; l < LSUB; l++) r[l] = coeff_t'($urandom_range(0, Q - 1));
    for (int a = 0; a < NA; a++) u_hbm.mem[8 + a] = r;         // BConv constants
    for (int k = 0; k < 16; k++) begin
      for (int l = 0; l < ROW_LANES; l++) r[l] = coeff_t'($urandom_range(0, Q - 1));
      u_hbm.mem[16 + k] = r;                                   // deep data
    end
    for (int k = 0; k < 8; k++) begin
      for (int l = 0; l < ROW_LANES; l++) r[l] = coeff_t'($urandom_range(0, Q - 1));
      u_hbm.mem[32'h104 + k] = r;                              // shallow data
    end
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- deep task (log N = 16), low priority ----
    push(0, task_i(16));
    push(0, hbm(OP_HBMLOAD, 0, 0, 32));
    push(0, ins(OP_L2LOAD, ALL, 1, 0, 0, NA));                // twiddles -> row 0 of every affiliation
    push(0, ins(OP_L2LOAD, ALL, 1, 8, 1, NA));                // BConv constants -> row 1
    push(0, ins(OP_L2LOAD, ALL, 1, 16, 10, 2 * NA));          // column c -> affiliation c%NA, row 10+c/NA
    i = ins(OP_CLUSTER, ALL, 1, 0, 0, 1); i.c.kind = CK_LOAD; i.c.ldsel = LD_TWIDDLE; push(0, i);
    i = ins(OP_CLUSTER, ALL, 1, 1, 0, 1); i.c.kind = CK_LOAD; i.c.ldsel = LD_BCONST; push(0, i);
    i = ins(OP_CLUSTER, ALL, 1, 10, 100, 2); i.c.route = RT_L3T; push(0, i);
    i = ins(OP_CLUSTER, ALL, 1, 10, 110, 2); i.c.cfg.ntt_en = 1'b0; i.c.cfg.mc_op = MC_MUL; i.c.scalar = 1234; push(0, i);
    i = ins(OP_CLUSTER, ALL, 1, 10, 120, 2); i.c.kind = CK_BCONV; push(0, i);
    push(0, ins(OP_L2STORE, 1 << A3, 1, 100, 600, 2));
    push(0, ins(OP_L2STORE, 1 << A2, 1, 110, 602, 2));
    push(0, ins(OP_L2STORE, 1 << A1, 1, 120, 604, 1));
    push(0, hbm(OP_HBMSTORE, 32'h1000, 600, 5));

    // ---- shallow task (log N = 13), high priority, on affiliations S1 and S2 ----
    push(1, task_i(13));
    push(1, hbm(OP_HBMLOAD, 32'h100, 40, 12));
    push(1, ins(OP_L2LOAD, 1 << S1, 7, 40, 0, 4));
    push(1, ins(OP_L2LOAD, 1 << S1, 7, 44, 10, 8));
    push(1, ins(OP_L2LOAD, 1 << S2, 7, 40, 0, 4));
    push(1, ins(OP_L2LOAD, 1 << S2, 7, 44, 10, 8));
    i = ins(OP_CLUSTER, 1 << S1, 7, 0, 0, 1); i.c.kind = CK_LOAD; push(1, i);
    i = ins(OP_CLUSTER, 1 << S2, 7, 0, 0, 1); i.c.kind = CK_LOAD; push(1, i);
    i = ins(OP_CLUSTER, 1 << S1, 7, 10, 100, 2); i.c.cfg.entrance = 3'd1; i.c.route = RT_L2T; push(1, i);
    i = ins(OP_CLUSTER, 1 << S2, 7, 10, 100, 2); i.c.cfg.entrance = 3'd1; i.c.route = RT_L2T; push(1, i);
    for (int p = 0; p < 4; p++) begin
      i = ins(OP_L2STORE, 1 << S1, 0, 100, 700 + 2 * p, 2); i.part_mask = 2'(p); push(1, i);
    end
    i = ins(OP_L2STORE, 1 << S2, 0, 100, 708, 2); i.part_mask = 2'd2; push(1, i);
    push(1, hbm(OP_HBMSTORE, 32'h2000, 700, 10));

    while (!idle) @(negedge clk);
    check_results();
    $display("mechanisms: l3t=%0d l2t=%0d bypass=%0d entrance=%0d bconv=%0d parallel=%0d all8=%0d stall=%0d preempt=%0d modesw=%0d l2load=%0d l2store=%0d hbmload=%0d hbmstore=%0d cycles=%0d",
      n_l3t, n_l2t, n_bypass, n_entrance, n_bconv, n_parallel, n_all8, n_stall, n_preempt, n_mode_switch,
      n_l2load, n_l2store, n_hbmload, n_hbmstore, cyc);
    checks += 14;
    if (n_l3t == 0) failures++;
    if (n_l2t == 0) failures++;
    if (n_bypass == 0) failures++;
    if (n_entrance == 0) failures++;
    if (n_bconv == 0) failures++;
    if (n_parallel == 0) failures++;
    if (n_all8 == 0) failures++;
    if (n_stall == 0) failures++;
    if (n_preempt == 0) failures++;
    if (n_mode_switch < 2) failures++;
    if (n_l2load == 0 || n_l2store == 0 || n_hbmload == 0 || n_hbmstore == 0) failures++;
    if (n_deep_tasks != 1 || n_shallow_tasks != 1) failures++;
    if (mode != 2'b01) failures++;
    if (n_l2t != 2 || n_l3t != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_results();
    coeff_t x [ROW_LANES], o [ROW_LANES];
    coeff_t nt [NA][2][ROW_LANES];
    coeff_t sn [4][2][ROW_LANES];
    coeff_t [ROW_LANES-1:0] got;
    // deep: NTT of affiliation j's row r = HBM row 16 + NA*r + j
    for (int j = 0; j < NA; j++)
      for (int rr = 0; rr < 2; rr++) begin
        for (int l = 0; l < ROW_LANES; l++) x[l] = u_hbm.mem[16 + NA * rr + j][l];
        ntt(x, 8, o);
        nt[j][rr] = o;
      end
    // affiliation A3, rows 100/101, after the L3 transpose: lane l of
    // affiliation a is L3 port 256a+l, fed by port p/NA of affiliation p%NA
    for (int rr = 0; rr < 2; rr++) begin
      got = u_hbm.mem[32'h1000 + rr];
      for (int l = 0; l < ROW_LANES; l++) begin
        int g;
        g = 256 * A3 + l;
        checks++; if (got[l] != nt[g % NA][rr][g / NA]) failures++;
      end
    end
    // affiliation A2, bypass with multiply
    for (int rr = 0; rr < 2; rr++) begin
      got = u_hbm.mem[32'h1002 + rr];
      for (int l = 0; l < ROW_LANES; l++) begin
        checks++; if (got[l] != mm(u_hbm.mem[16 + NA * rr + A2][l], 1234)) failures++;
      end
    end
    // affiliation A1, BConv of its two rows
    got = u_hbm.mem[32'h1004];
    for (int rr = 0; rr < 2; rr++) begin
      coeff_t s;
      s = 0;
      for (int l = 0; l < LSUB; l++)
        s = coeff_t'((64'(s) + 64'(mm(u_hbm.mem[16 + NA * rr + A1][l], u_hbm.mem[8][l]))) % 64'(Q));
      checks++; if (got[rr] != s) failures++;
    end
    // shallow: partition p row r holds column 4r+p = HBM row 0x104+4r+p
    for (int p = 0; p < 4; p++)
      for (int rr = 0; rr < 2; rr++) begin
        for (int l = 0; l < 128; l++) x[l] = u_hbm.mem[32'h104 + 4 * rr + p][(p == 1 ? 128 : 0) + l];
        ntt(x, 7, o);
        sn[p][rr] = o;
      end
    for (int p = 0; p < 4; p++)
      for (int rr = 0; rr < 2; rr++) begin
        got = u_hbm.mem[32'h2000 + 2 * p + rr];
        for (int l = 0; l < 128; l++) begin
          int g;
          g = 128 * p + l;
          checks++; if (got[l] != sn[g % 4][rr][g / 4]) failures++;
        end
      end
    // affiliation S2 ran the same shallow task in parallel (partition 2 stored)
    for (int rr = 0; rr < 2; rr++) begin
      got = u_hbm.mem[32'h2008 + rr];
      for (int l = 0; l < 128; l++) begin
        int g;
        g = 256 + l;
        checks++; if (got[l] != sn[g % 4][rr][g / 4]) failures++;
      end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
