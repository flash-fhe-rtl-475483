// flash_fhe_top: the heterogeneous FHE accelerator.
//
// Eight cluster affiliations, each one 256-point bootstrappable cluster and
// two 128-point swift clusters around a shared 8 MB L1 cache and an L2
// transpose; an L3 transpose across the eight bootstrappable clusters; a
// data distributor and a 256 MB L2 cache; an engine data manager towards
// off-chip memory; and the scheduler that executes the driver's
// instructions.  Deep tasks (log N > 14) use the eight bootstrappable
// clusters together (L1 + L3 transposes); shallow tasks use one affiliation
// each (L1 + L2 transposes), so up to eight run side by side.
//
// NA (default 8, the paper's count) sets the number of affiliations; the
// L3 transpose and the deep-mode distribution follow it (port i of
// bootstrappable cluster j -> port NA*i+j).  An affiliation counts as busy
// for the controller while the L2 mover is moving rows into or out of it.
//
// Ports: the instruction stream from the host interface (valid/ready with a
// priority bit), and the request/response channel of the off-chip memory
// controller (row = 256 coefficients).  The PCIe interface, the memory
// controller, the HBM stacks and their PHYs are outside this module.  Status
// outputs report idleness, the mode of each queue and scheduler counters.
module flash_fhe_top
  import fhe_pkg::*;
#(
  parameter int NA      = NAFF,      // cluster affiliations (8 in the paper)
  parameter int L1_ROWS = L1_DEPTH,
  parameter int L2_ROWS = 262144
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        instr_valid,
  input  logic        instr_prio,
  input  instr_t      instr,
  output logic        instr_ready,
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic        mem_req_we,
  output logic [31:0] mem_req_addr,
  output coeff_t [ROW_LANES-1:0] mem_req_wdata,
  input  logic        mem_rsp_valid,
  input  coeff_t [ROW_LANES-1:0] mem_rsp_rdata,
  output logic        idle,
  output logic [1:0]  mode,
  output logic [15:0] n_deep_tasks,
  output logic [15:0] n_shallow_tasks,
  output logic [15:0] n_preempt,
  output logic [15:0] n_mode_switch
);
  localparam int LAW  = $clog2(L1_ROWS);
  localparam int L2AW = $clog2(L2_ROWS);

  // ---- scheduler ------------------------------------------------------------
  logic [NA-1:0] aff_cmd_valid, aff_busy, aff_busy_s, mv_tgt;
  logic [2:0]  aff_clu_mask;
  ccmd_t       aff_cmd;
  logic        mv_start, mv_store, mv_mode, mv_boot, mv_busy;
  logic [2:0]  mv_aff;
  logic [1:0]  mv_part;
  logic [AW-1:0] mv_src, mv_dst, edm_l2addr;
  logic [15:0] mv_rows, edm_rows;
  logic        edm_start, edm_store, edm_busy;
  logic [31:0] edm_haddr;

  scheduler #(.NA(NA)) u_sched (
    .clk, .rst_n, .instr_valid, .instr_prio, .instr, .instr_ready,
    .aff_cmd_valid, .aff_clu_mask, .aff_cmd, .aff_busy(aff_busy_s),
    .mv_start, .mv_store, .mv_mode, .mv_aff, .mv_boot, .mv_part,
    .mv_src, .mv_dst, .mv_rows, .mv_busy,
    .edm_start, .edm_store, .edm_haddr, .edm_l2addr, .edm_rows, .edm_busy,
    .idle, .mode, .n_deep_tasks, .n_shallow_tasks, .n_preempt, .n_mode_switch);

  // An affiliation also counts as busy while the L2 mover reads or writes
  // its L1 (all affiliations for a deep-mode load), so that a cluster
  // command never runs ahead of the rows it uses.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mv_tgt <= '0;
    else if (mv_start) mv_tgt <= (mv_mode && !mv_store) ? '1 : NA'(1 << (int'(mv_aff) % NA));
  end
  assign aff_busy_s = aff_busy | (mv_busy ? mv_tgt : '0);

  // ---- L2 cache and its users ------------------------------------------------
  logic        l2_rd_en, l2_wr_en;
  logic [L2AW-1:0] l2_rd_addr, l2_wr_addr;
  coeff_t [ROW_LANES-1:0] l2_rd_data, l2_wr_data;
  logic        mv_l2_rd_en, mv_l2_wr_en, edm_l2_rd_en, edm_l2_wr_en;
  logic [L2AW-1:0] mv_l2_rd_addr, mv_l2_wr_addr, edm_l2_rd_addr, edm_l2_wr_addr;
  coeff_t [ROW_LANES-1:0] mv_l2_wr_data, edm_l2_wr_data;

  assign l2_rd_en   = mv_l2_rd_en || edm_l2_rd_en;
  assign l2_rd_addr = mv_l2_rd_en ? mv_l2_rd_addr : edm_l2_rd_addr;
  assign l2_wr_en   = mv_l2_wr_en || edm_l2_wr_en;
  assign l2_wr_addr = mv_l2_wr_en ? mv_l2_wr_addr : edm_l2_wr_addr;
  assign l2_wr_data = mv_l2_wr_en ? mv_l2_wr_data : edm_l2_wr_data;

  l2_cache #(.DEPTH(L2_ROWS)) u_l2 (
    .clk, .rd_en(l2_rd_en), .rd_addr(l2_rd_addr), .rd_data(l2_rd_data),
    .wr_en(l2_wr_en), .wr_addr(l2_wr_addr), .wr_data(l2_wr_data));

  engine_data_manager #(.L2AW(L2AW)) u_edm (
    .clk, .rst_n, .start(edm_start), .op_store(edm_store), .haddr(edm_haddr),
    .l2addr(L2AW'(edm_l2addr)), .rows(edm_rows), .busy(edm_busy),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata,
    .l2_rd_en(edm_l2_rd_en), .l2_rd_addr(edm_l2_rd_addr), .l2_rd_data(l2_rd_data),
    .l2_wr_en(edm_l2_wr_en), .l2_wr_addr(edm_l2_wr_addr), .l2_wr_data(edm_l2_wr_data));

  logic        dd_valid, dd_mode;
  logic [2:0]  dd_aff;
  logic [15:0] dd_col;
  logic [LAW-1:0] dd_base, dd_wr_addr, st_rd_addr;
  coeff_t [ROW_LANES-1:0] dd_data, dd_wr_data, st_rd_data;
  logic [NA-1:0][NPART-1:0] dd_wr_part;
  logic [NAFF-1:0] st_rd_en;
  logic        st_boot;
  logic [1:0]  st_part;
  coeff_t [ROW_LANES-1:0] aff_st_data [NA];
  logic [2:0]  st_sel;

  l2_mover #(.L2AW(L2AW), .LAW(LAW)) u_mv (
    .clk, .rst_n, .start(mv_start), .is_store(mv_store), .mode(mv_mode), .aff(mv_aff),
    .boot(mv_boot), .part(mv_part), .src(mv_src), .dst(mv_dst), .rows(mv_rows), .busy(mv_busy),
    .l2_rd_en(mv_l2_rd_en), .l2_rd_addr(mv_l2_rd_addr), .l2_rd_data(l2_rd_data),
    .l2_wr_en(mv_l2_wr_en), .l2_wr_addr(mv_l2_wr_addr), .l2_wr_data(mv_l2_wr_data),
    .dd_valid, .dd_mode, .dd_aff, .dd_col, .dd_base, .dd_data,
    .st_rd_en, .st_boot, .st_part, .st_rd_addr, .st_rd_data);

  data_distributor #(.NA(NA), .LAW(LAW)) u_dd (
    .clk, .rst_n, .in_valid(dd_valid), .mode(dd_mode), .aff(dd_aff), .col_idx(dd_col),
    .base(dd_base), .in_data(dd_data), .wr_part(dd_wr_part), .wr_addr(dd_wr_addr),
    .wr_data(dd_wr_data));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) st_sel <= '0;
    else for (int a = 0; a < NA; a++) if (st_rd_en[a]) st_sel <= 3'(a);
  end
  assign st_rd_data = aff_st_data[int'(st_sel) % NA];

  // ---- affiliations and L3 transpose --------------------------------------
  logic   l3o_valid [NA];
  logic [LAW-1:0] l3o_addr [NA];
  coeff_t [ROW_LANES-1:0] l3o_data [NA];
  logic   l3_in_valid, l3_out_valid;
  logic [LAW-1:0] l3_addr_q;
  coeff_t l3_in [NA][ROW_LANES], l3_out [NA][ROW_LANES];
  coeff_t [ROW_LANES-1:0] l3i_data [NA];

  for (genvar a = 0; a < NA; a++) begin : g_aff
    cluster_affiliation #(.DEPTH(L1_ROWS)) u_aff (
      .clk, .rst_n, .cmd_valid(aff_cmd_valid[a]), .clu_mask(aff_clu_mask), .cmd(aff_cmd),
      .busy(aff_busy[a]),
      .dd_wr_part(dd_wr_part[a]), .dd_wr_addr, .dd_wr_data,
      .st_rd_en(st_rd_en[a]), .st_boot, .st_part, .st_rd_addr, .st_rd_data(aff_st_data[a]),
      .l3o_valid(l3o_valid[a]), .l3o_addr(l3o_addr[a]), .l3o_data(l3o_data[a]),
      .l3i_valid(l3_out_valid), .l3i_addr(l3_addr_q), .l3i_data(l3i_data[a]));
    for (genvar i = 0; i < ROW_LANES; i++) begin : g_l
      assign l3_in[a][i]    = l3o_data[a][i];
      assign l3i_data[a][i] = l3_out[a][i];
    end
  end

  always_comb begin
    l3_in_valid = 1'b0;
    for (int a = 0; a < NA; a++) l3_in_valid |= l3o_valid[a];
  end
  always_ff @(posedge clk) l3_addr_q <= l3o_addr[0];

  l3_transpose #(.NCL(NA), .LANES(ROW_LANES)) u_l3t (
    .clk, .rst_n, .in_valid(l3_in_valid), .in_data(l3_in),
    .out_valid(l3_out_valid), .out_data(l3_out));
endmodule
