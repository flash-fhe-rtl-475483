// scheduler: the hardware controller that executes the instruction stream
// produced by the software driver.
//
// Instructions arrive on a valid/ready port with a priority bit and wait in
// one of two in-order queues (high and low priority).  Each cycle the head
// of the high-priority queue is considered if that queue holds anything,
// otherwise the head of the low-priority queue, so a high-priority task
// preempts a low-priority one at the next instruction boundary (the driver
// inserts the instructions that spill and reload the preempted task's data).
// An instruction is issued when every unit it names is idle:
//   OP_TASK      records the task's log N; log N > SHALLOW_MAX_LOGN puts the
//                queue in deep mode, otherwise shallow mode
//   OP_CLUSTER   cluster command to the clusters clu_mask of the
//                affiliations aff_mask (all eight for deep work, one for
//                shallow work, so eight shallow tasks can run at once)
//   OP_L2LOAD    L2 -> data distributor -> L1, in the queue's mode
//   OP_L2STORE   L1 of one affiliation -> L2
//   OP_HBMLOAD / OP_HBMSTORE  through the engine data manager
//   OP_FENCE     waits for every unit to be idle
// Issue is combinational from the queue head (units raise busy the next
// cycle), one instruction per cycle.  Counters report tasks by mode,
// preemptions and mode switches.
//
// The paper gives the two-part scheduler, deep/shallow mode selection from
// the cryptographic parameters, one shallow task per affiliation and
// priority-based preemption; the instruction set, queues and issue rule are
// this design's.
module scheduler
  import fhe_pkg::*;
#(
  parameter int NA     = NAFF,
  parameter int QDEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction input (from the host interface)
  input  logic        instr_valid,
  input  logic        instr_prio,
  input  instr_t      instr,
  output logic        instr_ready,
  // affiliations
  output logic [NA-1:0] aff_cmd_valid,
  output logic [2:0]  aff_clu_mask,
  output ccmd_t       aff_cmd,
  input  logic [NA-1:0] aff_busy,
  // L2 mover
  output logic        mv_start,
  output logic        mv_store,
  output logic        mv_mode,
  output logic [2:0]  mv_aff,
  output logic        mv_boot,
  output logic [1:0]  mv_part,
  output logic [AW-1:0] mv_src,
  output logic [AW-1:0] mv_dst,
  output logic [15:0] mv_rows,
  input  logic        mv_busy,
  // engine data manager
  output logic        edm_start,
  output logic        edm_store,
  output logic [31:0] edm_haddr,
  output logic [AW-1:0] edm_l2addr,
  output logic [15:0] edm_rows,
  input  logic        edm_busy,
  // status
  output logic        idle,
  output logic [1:0]  mode,          // per queue: 1 = deep
  output logic [15:0] n_deep_tasks,
  output logic [15:0] n_shallow_tasks,
  output logic [15:0] n_preempt,
  output logic [15:0] n_mode_switch
);
  localparam int QW = $clog2(QDEPTH);

  instr_t       q_mem [2][QDEPTH];
  logic [QW:0]  q_cnt [2];
  logic [QW-1:0] q_rd [2], q_wr [2];
  logic         qsel, have, go;
  instr_t       head;
  logic         res_free;
  logic [NA-1:0] tgt;
  logic [2:0]   first_aff;
  logic         last_mode;

  assign instr_ready = (q_cnt[instr_prio] != (QW+1)'(QDEPTH));
  assign qsel = (q_cnt[1] != '0);
  assign have = (q_cnt[qsel] != '0);
  assign head = q_mem[qsel][q_rd[qsel]];
  assign idle = (q_cnt[0] == '0) && (q_cnt[1] == '0) && !(|aff_busy) && !mv_busy && !edm_busy;

  always_comb begin
    first_aff = '0;
    for (int a = NA - 1; a >= 0; a--) if (head.aff_mask[a]) first_aff = 3'(a);
    tgt = (head.op == OP_L2LOAD && mode[qsel]) ? '1 : head.aff_mask;
    unique case (head.op)
      OP_CLUSTER:               res_free = !(|(aff_busy & tgt));
      OP_L2LOAD, OP_L2STORE:    res_free = !(|(aff_busy & tgt)) && !mv_busy && !edm_busy;
      OP_HBMLOAD, OP_HBMSTORE:  res_free = !mv_busy && !edm_busy;
      OP_FENCE:                 res_free = !(|aff_busy) && !mv_busy && !edm_busy;
      default:                  res_free = 1'b1;
    endcase
    go = have && res_free;
  end

  // issue
  always_comb begin
    aff_cmd_valid = (go && head.op == OP_CLUSTER) ? head.aff_mask : '0;
    aff_clu_mask  = head.clu_mask;
    aff_cmd       = head.c;
    mv_start   = go && (head.op == OP_L2LOAD || head.op == OP_L2STORE);
    mv_store   = (head.op == OP_L2STORE);
    mv_mode    = mode[qsel];
    mv_aff     = first_aff;
    mv_boot    = head.clu_mask[0];
    mv_part    = head.part_mask;
    mv_src     = head.c.src;
    mv_dst     = head.c.dst;
    mv_rows    = head.c.rows;
    edm_start  = go && (head.op == OP_HBMLOAD || head.op == OP_HBMSTORE);
    edm_store  = (head.op == OP_HBMSTORE);
    edm_haddr  = head.haddr;
    edm_l2addr = (head.op == OP_HBMSTORE) ? head.c.src : head.c.dst;
    edm_rows   = head.c.rows;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 2; k++) begin q_cnt[k] <= '0; q_rd[k] <= '0; q_wr[k] <= '0; end
      mode <= '0; last_mode <= 1'b0;
      n_deep_tasks <= '0; n_shallow_tasks <= '0; n_preempt <= '0; n_mode_switch <= '0;
    end else begin
      logic push, pop;
      for (int k = 0; k < 2; k++) begin
        push = instr_valid && instr_ready && (instr_prio == 1'(k));
        pop  = go && (qsel == 1'(k));
        if (push) begin
          q_mem[k][q_wr[k]] <= instr;
          q_wr[k] <= q_wr[k] + 1'b1;
        end
        if (pop) q_rd[k] <= q_rd[k] + 1'b1;
        q_cnt[k] <= q_cnt[k] + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
      end
      if (go && head.op == OP_TASK) begin
        logic deep;
        deep = (head.logn > 5'(SHALLOW_MAX_LOGN));
        mode[qsel] <= deep;
        if (deep) n_deep_tasks <= n_deep_tasks + 1'b1;
        else      n_shallow_tasks <= n_shallow_tasks + 1'b1;
        if (deep != last_mode) n_mode_switch <= n_mode_switch + 1'b1;
        last_mode <= deep;
        if (qsel && q_cnt[0] != '0) n_preempt <= n_preempt + 1'b1;
      end
    end
  end
endmodule
