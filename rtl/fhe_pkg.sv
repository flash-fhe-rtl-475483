// fhe_pkg: types and constants shared by the heterogeneous FHE accelerator.
//
// Residues are W-bit words (W = 32, moduli below 2^31); the word length is a
// choice of this design, the paper does not state one.  The cluster sizes
// (256-point bootstrappable, 128-point swift, eight affiliations, l_sub = 60)
// follow the paper.  The instruction format, the routing and the pass
// configuration are this design's own.
package fhe_pkg;

  localparam int W            = 32;     // residue width
  localparam int NAFF         = 8;      // cluster affiliations
  localparam int BOOT_POINTS  = 256;    // sqrt(2^16)-point NTT in a bootstrappable cluster
  localparam int SWIFT_POINTS = 128;    // sqrt(2^14)-point NTT in a swift cluster
  localparam int LSUB         = 60;     // parallel modular multipliers in BConv
  localparam int TB_PORTS     = 32;     // ports of one L1 transpose building block
  localparam int TB_STAGES    = 5;      // log2(TB_PORTS)
  localparam int PART_LANES   = 128;    // lanes of one L1 partition
  localparam int NPART        = 4;      // L1 partitions = cluster indices 0..3
  localparam int L1_BYTES     = 8 * 1024 * 1024;
  localparam int L1_DEPTH     = L1_BYTES / (NPART * PART_LANES * (W / 8));  // rows per partition
  localparam int L1_AW        = $clog2(L1_DEPTH);
  localparam int ROW_LANES    = 256;    // lanes of an L2 row / HBM beat
  localparam int AW           = 18;     // address field width of commands
  localparam int SHALLOW_MAX_LOGN = 14;

  typedef logic [W-1:0] coeff_t;

  // Operation of the modular calculation unit.
  typedef enum logic [2:0] {
    MC_BYPASS = 3'd0,
    MC_ADD    = 3'd1,   // x + scalar
    MC_SUB    = 3'd2,   // x - scalar
    MC_MUL    = 3'd3,   // x * scalar
    MC_TWIST  = 3'd4    // x * t, t <- t * step (twisting factors w^(r*c))
  } mc_op_e;

  // Data output selector of the (i)NTT pipeline.
  typedef enum logic [1:0] {
    OS_NTT       = 2'd0,
    OS_MODCALC   = 2'd1,
    OS_TRANSPOSE = 2'd2
  } out_sel_e;

  // Where a cluster's results are written.
  typedef enum logic [1:0] {
    RT_LOCAL = 2'd0,    // own L1 partition(s)
    RT_L2T   = 2'd1,    // through the L2 transpose (shallow mode)
    RT_L3T   = 2'd2     // through the L3 transpose (deep mode)
  } route_e;

  // Kind of work a cluster command asks for.
  typedef enum logic [1:0] {
    CK_PASS  = 2'd0,    // stream rows through the (i)NTT pipeline
    CK_BCONV = 2'd1,    // stream rows through BConv
    CK_LOAD  = 2'd2     // load a configuration row
  } ckind_e;

  // Configuration register loaded by CK_LOAD.
  typedef enum logic [1:0] {
    LD_TWIDDLE = 2'd0,  // NTT twiddle table w^k, k < POINTS/2
    LD_STEP    = 2'd1,  // twist step per lane
    LD_BCONST  = 2'd2,  // BConv constants, lanes 0..LSUB-1
    LD_ACC     = 2'd3   // BConv partial sums for the final add
  } ldsel_e;

  // Static configuration of one pass through an (i)NTT pipeline.
  typedef struct packed {
    logic [2:0] entrance;    // first NTT stage used
    logic [2:0] exit_stage;  // last NTT stage used
    logic       ntt_en;      // 0: bypass NTT network
    mc_op_e     mc_op;
    logic [2:0] tr_exit;     // L1 transpose exit E0..E4
    logic       tr_en;       // 0: bypass L1 transpose
    out_sel_e   out_sel;
  } pass_cfg_t;

  // Command executed by one cluster.
  typedef struct packed {
    ckind_e      kind;
    ldsel_e      ldsel;
    pass_cfg_t   cfg;
    logic        acc;        // BConv: final add with the destination row
    route_e      route;
    logic [AW-1:0] src;
    logic [AW-1:0] dst;
    logic [15:0] rows;
    coeff_t      q;
    coeff_t      scalar;
  } ccmd_t;

  // Instructions of the hardware controller.
  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_TASK     = 4'd1,  // start of a task: log N decides deep or shallow mode
    OP_CLUSTER  = 4'd2,  // cluster command on the named clusters of the named affiliations
    OP_L2LOAD   = 4'd3,  // L2 rows -> data distributor -> L1
    OP_L2STORE  = 4'd4,  // L1 rows -> L2
    OP_HBMLOAD  = 4'd5,  // HBM -> L2 (engine data manager)
    OP_HBMSTORE = 4'd6,  // L2 -> HBM
    OP_FENCE    = 4'd7   // wait until every unit is idle
  } opcode_e;

  typedef struct packed {
    opcode_e     op;
    logic [NAFF-1:0] aff_mask;
    logic [2:0]  clu_mask;    // bit0 bootstrappable, bit1/bit2 swift 0/1
    logic [4:0]  logn;        // OP_TASK
    logic [1:0]  part_mask;   // OP_L2STORE: 0..3 partition number in [1:0]
    logic [31:0] haddr;       // HBM row address
    ccmd_t       c;           // cluster command, and src/dst/rows for moves
  } instr_t;

  function automatic coeff_t add_mod(coeff_t a, coeff_t b, coeff_t q);
    logic [W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, q}) s = s - {1'b0, q};
    return s[W-1:0];
  endfunction

  function automatic coeff_t sub_mod(coeff_t a, coeff_t b, coeff_t q);
    logic [W:0] s;
    s = {1'b0, a} + {1'b0, q} - {1'b0, b};
    if (s >= {1'b0, q}) s = s - {1'b0, q};
    return s[W-1:0];
  endfunction

endpackage
