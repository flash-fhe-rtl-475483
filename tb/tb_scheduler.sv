// tb_scheduler: the controller with models of the units it drives (each
// stays busy for a fixed time after a start) and a queue depth of 4.
// Instructions carry a tag in their row count, and the order and cycle of
// every issue is logged.  Checked:
//   - in-order issue within a queue, and that an instruction waits while a
//     unit it names is busy (cluster command to a busy affiliation, L2 move
//     while the engine data manager is busy, fence until everything idles);
//   - a command for another affiliation issues as soon as it is at the head
//     (parallel shallow tasks);
//   - a high-priority task overtakes the waiting low-priority queue and is
//     counted as a preemption;
//   - deep/shallow mode from log N (2^16 deep, 2^13 shallow) and the
//     task and mode-switch counters;
//   - back-pressure: instr_ready falls when a queue is full.
module tb_scheduler;
  import fhe_pkg::*;
  localparam int NA = NAFF, BUSYC = 12;
  logic clk = 0, rst_n = 0, instr_valid = 0, instr_prio = 0, instr_ready;
  instr_t instr;
  logic [NA-1:0] aff_cmd_valid, aff_busy;
  logic [2:0] aff_clu_mask, mv_aff;
  ccmd_t aff_cmd;
  logic mv_start, mv_store, mv_mode, mv_boot, mv_busy, edm_start, edm_store, edm_busy, idle;
  logic [1:0] mv_part, mode;
  logic [AW-1:0] mv_src, mv_dst, edm_l2addr;
  logic [15:0] mv_rows, edm_rows, n_deep_tasks, n_shallow_tasks, n_preempt, n_mode_switch;
  logic [31:0] edm_haddr;
  int checks = 0, failures = 0, cyc = 0;
  int aff_cnt [NA];
  int mv_cnt = 0, edm_cnt = 0;
  int log_tag [$], log_cyc [$];
  always #5 clk = ~clk;

  scheduler #(.NA(NA), .QDEPTH(4)) dut (.*);

  // unit models
  always_comb begin
    for (int a = 0; a < NA; a++) aff_busy[a] = (aff_cnt[a] != 0);
    mv_busy  = (mv_cnt != 0);
    edm_busy = (edm_cnt != 0);
  end
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int a = 0; a < NA; a++) begin
      if (aff_cmd_valid[a]) aff_cnt[a] <= BUSYC;
      else if (aff_cnt[a] != 0) aff_cnt[a] <= aff_cnt[a] - 1;
    end
    if (mv_start) mv_cnt <= BUSYC; else if (mv_cnt != 0) mv_cnt <= mv_cnt - 1;
    if (edm_start) edm_cnt <= BUSYC; else if (edm_cnt != 0) edm_cnt <= edm_cnt - 1;
    if (aff_cmd_valid != '0) begin log_tag.push_back(int'(aff_cmd.rows)); log_cyc.push_back(cyc); end
    if (mv_start)  begin log_tag.push_back(int'(mv_rows));  log_cyc.push_back(cyc); end
    if (edm_start) begin log_tag.push_back(int'(edm_rows)); log_cyc.push_back(cyc); end
  end

  function automatic instr_t mk(opcode_e op, int aff_mask, int tag, int logn = 0);
    instr_t i = '0;
    i.op = op; i.aff_mask = NA'(aff_mask); i.clu_mask = 3'b111; i.c.rows = 16'(tag);
    i.logn = 5'(logn);
    return i;
  endfunction
  task automatic push(input logic prio, input instr_t i);
    @(negedge clk); instr_valid = 1; instr_prio = prio; instr = i;
    while (!instr_ready) @(negedge clk);
    @(posedge clk); #1 instr_valid = 0;
  endtask
  function automatic int when(int tag);
    foreach (log_tag[k]) if (log_tag[k] == tag) return log_cyc[k];
    return -1;
  endfunction

  initial begin
    for (int a = 0; a < NA; a++) aff_cnt[a] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // ---- part 1: ordering and resource waits (low priority queue) ----
    push(0, mk(OP_TASK, 0, 0, 16));
    push(0, mk(OP_CLUSTER, 8'h01, 1));
    push(0, mk(OP_CLUSTER, 8'h01, 2));
    push(0, mk(OP_CLUSTER, 8'h02, 3));
    push(0, mk(OP_HBMLOAD, 0, 4));
    push(0, mk(OP_L2LOAD, 8'h02, 5));
    push(0, mk(OP_FENCE, 0, 0));
    push(0, mk(OP_CLUSTER, 8'hFF, 6));
    while (!idle) @(negedge clk);
    checks += 8;
    if (log_tag.size() != 6) failures++;
    for (int t = 1; t < 6; t++) if (!(when(t) >= 0 && when(t) < when(t + 1))) failures++;
    if (when(2) - when(1) < BUSYC) failures++;          // aff 0 busy
    if (when(3) - when(2) != 1) failures++;             // aff 1 free: next cycle
    if (when(6) - when(5) < BUSYC) failures++;          // fence
    checks += 2;
    if (when(5) - when(4) < BUSYC) failures++;          // L2 move waits for EDM
    if (mode[0] != 1'b1) failures++;

    // ---- part 2: preemption and back-pressure ----
    push(0, mk(OP_TASK, 0, 0, 16));
    push(0, mk(OP_CLUSTER, 8'h01, 7));
    push(0, mk(OP_CLUSTER, 8'h01, 8));   // waits: affiliation 0 busy
    push(0, mk(OP_CLUSTER, 8'h01, 9));
    push(0, mk(OP_CLUSTER, 8'h01, 10));
    push(0, mk(OP_CLUSTER, 8'h01, 11));
    checks++; if (instr_ready) failures++;  // low queue full again
    push(1, mk(OP_TASK, 0, 0, 13));
    push(1, mk(OP_CLUSTER, 8'h04, 20));
    while (!idle) @(negedge clk);
    checks += 7;
    if (!(when(20) >= 0 && when(20) < when(8))) failures++;
    if (n_preempt != 16'd1) failures++;
    if (n_deep_tasks != 16'd2 || n_shallow_tasks != 16'd1) failures++;
    if (n_mode_switch != 16'd2) failures++;       // shallow->deep, deep->shallow
    if (mode != 2'b01) failures++;
    if (when(11) < 0) failures++;
    if (log_tag.size() != 12) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
