// cluster_affiliation: one bootstrappable and two swift clusters sharing an
// L1 cache, plus the L2 transpose that connects the three clusters.
//
// The affiliation is the unit that runs one shallow workload on its own,
// and one eighth of a deep workload.  Its four L1 partitions correspond to
// the four 128-lane "clusters" 0..3 of the paper's data distribution: the
// bootstrappable cluster (as clusters 0 and 1) and swift clusters 0 and 1
// (as clusters 2 and 3).
//
// A cluster command (cmd_valid, cmd) is given to the clusters named in
// clu_mask (bit 0 bootstrappable, bits 1 and 2 the swift clusters), which
// run in lock step.  Result rows are written according to their route:
//   RT_LOCAL  into the cluster's own partition(s);
//   RT_L2T    through the L2 transpose into all four partitions (port i of
//             cluster j lands on L2 port 4i+j), one cycle later;
//   RT_L3T    the bootstrappable cluster's rows leave on l3o_* for the chip
//             level L3 transpose; rows coming back on l3i_* are written to
//             partitions 0 and 1.
// Rows from the data distributor (dd_*) and reads for stores to the L2 cache
// (st_*) use the same partition ports; the controller issues them only when
// the clusters are idle.  Write priority: distributor, L3, L2, local.
//
// The composition (1 + 2 clusters, shared L1, L2 transpose inside the
// affiliation) follows the paper; the port arbitration is this design's.
module cluster_affiliation
  import fhe_pkg::*;
#(
  parameter int DEPTH = L1_DEPTH
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  logic [2:0]  clu_mask,
  input  ccmd_t       cmd,
  output logic        busy,
  // data distributor writes
  input  logic [NPART-1:0] dd_wr_part,
  input  logic [$clog2(DEPTH)-1:0] dd_wr_addr,
  input  coeff_t [ROW_LANES-1:0] dd_wr_data,
  // reads for stores to the L2 cache
  input  logic        st_rd_en,
  input  logic        st_boot,
  input  logic [1:0]  st_part,
  input  logic [$clog2(DEPTH)-1:0] st_rd_addr,
  output coeff_t [ROW_LANES-1:0] st_rd_data,
  // L3 transpose
  output logic        l3o_valid,
  output logic [$clog2(DEPTH)-1:0] l3o_addr,
  output coeff_t [ROW_LANES-1:0] l3o_data,
  input  logic        l3i_valid,
  input  logic [$clog2(DEPTH)-1:0] l3i_addr,
  input  coeff_t [ROW_LANES-1:0] l3i_data
);
  localparam int LAW = $clog2(DEPTH);
  localparam int PL  = PART_LANES;

  // ---- clusters ---------------------------------------------------------
  logic   bc_busy, bc_rd_en, bc_wr_en;
  logic [LAW-1:0] bc_rd_addr, bc_wr_addr;
  coeff_t [ROW_LANES-1:0] bc_rd_data, bc_wr_data;
  route_e bc_route;
  logic   sc_busy [2], sc_rd_en [2], sc_wr_en [2];
  logic [LAW-1:0] sc_rd_addr [2], sc_wr_addr [2];
  coeff_t [PL-1:0] sc_rd_data [2], sc_wr_data [2];
  route_e sc_route [2];

  bootstrappable_cluster #(.POINTS(ROW_LANES), .NLSUB(LSUB), .LAW(LAW)) u_boot (
    .clk, .rst_n, .cmd_valid(cmd_valid && clu_mask[0]), .cmd, .busy(bc_busy),
    .rd_en(bc_rd_en), .rd_addr(bc_rd_addr), .rd_data(bc_rd_data),
    .wr_en(bc_wr_en), .wr_addr(bc_wr_addr), .wr_data(bc_wr_data), .wr_route(bc_route));

  for (genvar k = 0; k < 2; k++) begin : g_swift
    swift_cluster #(.POINTS(PL), .LAW(LAW)) u_swift (
      .clk, .rst_n, .cmd_valid(cmd_valid && clu_mask[k+1]), .cmd, .busy(sc_busy[k]),
      .rd_en(sc_rd_en[k]), .rd_addr(sc_rd_addr[k]), .rd_data(sc_rd_data[k]),
      .wr_en(sc_wr_en[k]), .wr_addr(sc_wr_addr[k]), .wr_data(sc_wr_data[k]), .wr_route(sc_route[k]));
  end

  assign busy = bc_busy || sc_busy[0] || sc_busy[1];

  // ---- L2 transpose -------------------------------------------------------
  logic   l2_in_valid, l2_out_valid;
  coeff_t l2_in [NPART][PL], l2_out [NPART][PL];
  logic [LAW-1:0] l2_addr_q [NPART];
  logic   l2_src [NPART];
  logic [LAW-1:0] l2_src_addr [NPART];
  always_comb begin
    l2_src[0] = bc_wr_en && bc_route == RT_L2T;
    l2_src[1] = l2_src[0];
    l2_src[2] = sc_wr_en[0] && sc_route[0] == RT_L2T;
    l2_src[3] = sc_wr_en[1] && sc_route[1] == RT_L2T;
    l2_src_addr[0] = bc_wr_addr;
    l2_src_addr[1] = bc_wr_addr;
    l2_src_addr[2] = sc_wr_addr[0];
    l2_src_addr[3] = sc_wr_addr[1];
    l2_in_valid = l2_src[0] || l2_src[2] || l2_src[3];
    for (int i = 0; i < PL; i++) begin
      l2_in[0][i] = bc_wr_data[i];
      l2_in[1][i] = bc_wr_data[PL + i];
      l2_in[2][i] = sc_wr_data[0][i];
      l2_in[3][i] = sc_wr_data[1][i];
    end
  end
  always_ff @(posedge clk) begin
    for (int p = 0; p < NPART; p++) l2_addr_q[p] <= l2_src_addr[p];
  end
  l2_transpose #(.NCL(NPART), .LANES(PL)) u_l2t (
    .clk, .rst_n, .in_valid(l2_in_valid), .in_data(l2_in),
    .out_valid(l2_out_valid), .out_data(l2_out));

  // ---- L3 transpose ports -------------------------------------------------
  assign l3o_valid = bc_wr_en && bc_route == RT_L3T;
  assign l3o_addr  = bc_wr_addr;
  assign l3o_data  = bc_wr_data;

  // ---- L1 cache ports -----------------------------------------------------
  logic [NPART-1:0]           rd_en, wr_en;
  logic [NPART-1:0][LAW-1:0]  rd_addr, wr_addr;
  coeff_t [NPART-1:0][PL-1:0] rd_data, wr_data;
  logic                       st_boot_q;
  logic [1:0]                 st_part_q;

  always_comb begin
    for (int p = 0; p < NPART; p++) begin
      // reads
      if (st_rd_en && (st_boot ? (p < 2) : (st_part == 2'(p)))) begin
        rd_en[p] = 1'b1; rd_addr[p] = st_rd_addr;
      end else if (p < 2) begin
        rd_en[p] = bc_rd_en; rd_addr[p] = bc_rd_addr;
      end else begin
        rd_en[p] = sc_rd_en[p-2]; rd_addr[p] = sc_rd_addr[p-2];
      end
      // writes
      wr_en[p] = 1'b0; wr_addr[p] = '0; wr_data[p] = '0;
      if (dd_wr_part[p]) begin
        wr_en[p] = 1'b1; wr_addr[p] = dd_wr_addr;
        for (int i = 0; i < PL; i++) wr_data[p][i] = dd_wr_data[(p == 1 ? PL : 0) + i];
      end else if (l3i_valid && p < 2) begin
        wr_en[p] = 1'b1; wr_addr[p] = l3i_addr;
        for (int i = 0; i < PL; i++) wr_data[p][i] = l3i_data[p*PL + i];
      end else if (l2_out_valid) begin
        wr_en[p] = 1'b1; wr_addr[p] = l2_addr_q[p];
        for (int i = 0; i < PL; i++) wr_data[p][i] = l2_out[p][i];
      end else if (p < 2) begin
        wr_en[p] = bc_wr_en && bc_route == RT_LOCAL; wr_addr[p] = bc_wr_addr;
        for (int i = 0; i < PL; i++) wr_data[p][i] = bc_wr_data[p*PL + i];
      end else begin
        wr_en[p] = sc_wr_en[p-2] && sc_route[p-2] == RT_LOCAL; wr_addr[p] = sc_wr_addr[p-2];
        wr_data[p] = sc_wr_data[p-2];
      end
    end
  end

  l1_cache #(.DEPTH(DEPTH)) u_l1 (
    .clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);

  always_ff @(posedge clk) begin
    st_boot_q <= st_boot;
    st_part_q <= st_part;
  end
  always_comb begin
    for (int i = 0; i < PL; i++) begin
      bc_rd_data[i]      = rd_data[0][i];
      bc_rd_data[PL + i] = rd_data[1][i];
    end
    sc_rd_data[0] = rd_data[2];
    sc_rd_data[1] = rd_data[3];
    st_rd_data = bc_rd_data;
    if (!st_boot_q) begin
      st_rd_data = '0;
      for (int i = 0; i < PL; i++) st_rd_data[i] = rd_data[st_part_q][i];
    end
  end
endmodule
