// ack: Adaptive Computation Kernel, a P_SYS x P_SYS array of ALUs with two
// execution modes (paper Sec. 4.2, Figs. 6 and 7).
//
// The ALUs are owned by P_SG = P_SYS/2 scatter units (rows 2u, 2u+1, columns
// 0..P_SG-1) and P_SG gather units (rows 2g, 2g+1, columns P_SG..P_SYS-1), as
// in the paper's PE figure; every unit multiplexes its ALUs' inputs by mode.
// The mode is a register loaded by cfg_valid: switching takes one cycle.
//
// Systolic mode (dense FT and attention matrix products) -- weight stationary,
// a dataflow this design chose (the paper only says weights enter from the
// Weight Buffer and vertex features from the Feature/Result Buffer, p_sys
// data per cycle each):
//   * sys_op = LOADW for P_SYS cycles shifts one weight row per cycle from the
//     north edge down the columns; ALU(r,c) ends holding W[k0+r][j0+c] if row
//     k0+P_SYS-1-i is presented in cycle i.
//   * sys_op = MAC, one vertex per cycle: sys_west = P_SYS consecutive input
//     features of a vertex (one per row), sys_north = the vertex's running
//     partial sums for P_SYS output features. Both are skewed inside the ACK,
//     activations travel east, partial sums travel south, and the bottom row
//     results are de-skewed: sys_out = sys_north + W_tile^T * sys_west appears
//     2*P_SYS-1 cycles after the inputs, with sys_out_tag = sys_in_tag.
// Scatter-gather mode (FA and readout): scatter units -> butterfly routing
// network (by dst / VPB) -> RAW units -> gather units, each gather unit
// writing its own destination bank. sg_done is high when all units are idle.
module ack
  import gnn_pkg::*;
#(
  parameter int P_SYS      = 16,
  parameter int P_SG       = P_SYS/2,
  parameter int VPB        = 32,
  parameter int CH_MAX     = 38,
  parameter int EDGE_DEPTH = 8192,
  parameter int TAG_W      = 8,
  parameter int BAW        = $clog2(VPB*CH_MAX),   // bank address width
  parameter int EAW        = $clog2(EDGE_DEPTH),
  parameter int ECW        = $clog2(EDGE_DEPTH+1)
) (
  input  logic clk,
  input  logic rst_n,
  // configuration
  input  logic      cfg_valid,
  input  ack_mode_e cfg_mode,
  input  agg_op_e   cfg_agg,
  output ack_mode_e mode,
  // systolic mode
  input  alu_op_e              sys_op,
  input  logic                 sys_in_valid,
  input  logic [TAG_W-1:0]     sys_in_tag,
  input  data_t [P_SYS-1:0]    sys_west,
  input  data_t [P_SYS-1:0]    sys_north,
  output logic                 sys_out_valid,
  output logic [TAG_W-1:0]     sys_out_tag,
  output data_t [P_SYS-1:0]    sys_out,
  // scatter-gather mode
  input  logic                     sg_start,
  input  logic                     sg_sweep,
  input  logic [P_SG-1:0][ECW-1:0] sg_n_edges,
  input  chunk_t                   sg_n_chunks,
  input  vidx_t                    sg_sweep_dst,
  output logic                     sg_done,
  output logic                     sg_conflict,   // routing network held a packet
  output logic                     sg_raw_stall,  // some RAW unit held an update
  // edge bank read ports
  output logic [P_SG-1:0]            edge_rd_en,
  output logic [P_SG-1:0][EAW-1:0]   edge_rd_addr,
  input  edge_t [P_SG-1:0]           edge_rd_data,
  // source feature bank read ports
  output logic [P_SG-1:0]            src_rd_en,
  output logic [P_SG-1:0][BAW-1:0]   src_rd_addr,
  input  data_t [P_SG-1:0][P_SYS-1:0] src_rd_data,
  // destination bank ports
  output logic [P_SG-1:0]            dst_rd_en,
  output logic [P_SG-1:0][BAW-1:0]   dst_rd_addr,
  input  data_t [P_SG-1:0][P_SYS-1:0] dst_rd_data,
  output logic [P_SG-1:0]            dst_wr_en,
  output logic [P_SG-1:0][BAW-1:0]   dst_wr_addr,
  output data_t [P_SG-1:0][P_SYS-1:0] dst_wr_data
);
  localparam int LANES = 2*P_SG;
  localparam int LVW   = $clog2(VPB);
  localparam int PW    = $clog2(P_SG);
  localparam int PAYW  = LVW + CH_W + LANES*DATA_W;

  initial begin
    assert (LANES == P_SYS) else $error("ack: P_SG must be P_SYS/2");
    assert ((1 << LVW) == VPB) else $error("ack: VPB must be a power of two");
  end

  agg_op_e agg;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      mode <= MODE_SYSTOLIC; agg <= AGG_SUM;
    end else if (cfg_valid) begin
      mode <= cfg_mode; agg <= cfg_agg;
    end

  // ---------------- systolic skew / de-skew ----------------
  data_t [P_SYS-1:0] west_in, north_in, north_mac;
  data_t [P_SYS-1:0] a_mesh_in  [P_SYS];
  data_t [P_SYS-1:0] b_mesh_in  [P_SYS];
  data_t [P_SYS-1:0] a_mesh_out [P_SYS];
  data_t [P_SYS-1:0] acc_mesh   [P_SYS];

  for (genvar r = 0; r < P_SYS; r++) begin : g_skew
    // west input of row r delayed r cycles; north input of column r delayed r
    data_t wq [r+1];
    data_t nq [r+1];
    assign wq[0] = sys_in_valid ? sys_west[r]  : '0;
    assign nq[0] = sys_in_valid ? sys_north[r] : '0;
    for (genvar d = 1; d <= r; d++) begin : g_d
      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n) begin wq[d] <= '0; nq[d] <= '0; end
        else begin wq[d] <= wq[d-1]; nq[d] <= nq[d-1]; end
    end
    assign west_in[r]   = wq[r];
    assign north_mac[r] = nq[r];
    assign north_in[r]  = (sys_op == ALU_LOADW) ? sys_north[r] : north_mac[r];
  end

  for (genvar r = 0; r < P_SYS; r++) begin : g_mesh
    for (genvar c = 0; c < P_SYS; c++) begin : g_c
      assign a_mesh_in[r][c] = (c == 0) ? west_in[r]  : a_mesh_out[r][(c == 0) ? 0 : c-1];
      assign b_mesh_in[r][c] = (r == 0) ? north_in[c] : acc_mesh[(r == 0) ? 0 : r-1][c];
    end
  end

  for (genvar c = 0; c < P_SYS; c++) begin : g_deskew
    localparam int D = P_SYS - 1 - c;
    data_t q [D+1];
    assign q[0] = acc_mesh[P_SYS-1][c];
    for (genvar d = 1; d <= D; d++) begin : g_d
      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n) q[d] <= '0;
        else        q[d] <= q[d-1];
    end
    assign sys_out[c] = q[D];
  end

  localparam int LAT = 2*P_SYS - 1;
  logic [LAT-1:0]            vpipe;
  logic [LAT-1:0][TAG_W-1:0] tpipe;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      vpipe <= '0; tpipe <= '0;
    end else begin
      vpipe <= {vpipe[LAT-2:0], sys_in_valid && sys_op == ALU_MAC && mode == MODE_SYSTOLIC};
      tpipe <= {tpipe[LAT-2:0], sys_in_tag};
    end
  assign sys_out_valid = vpipe[LAT-1];
  assign sys_out_tag   = tpipe[LAT-1];

  // ---------------- units ----------------
  logic [P_SG-1:0]            s_done, g_idle;
  logic [P_SG-1:0]            u_valid, u_ready;
  vidx_t  [P_SG-1:0]          u_dst;
  chunk_t [P_SG-1:0]          u_chunk;
  data_t  [P_SG-1:0][LANES-1:0] u_data;
  logic [P_SG-1:0][PW-1:0]    u_port;
  logic [P_SG-1:0][PAYW-1:0]  u_pay, r_pay;
  logic [P_SG-1:0]            r_valid, r_ready, raw_stall;

  for (genvar u = 0; u < P_SG; u++) begin : g_unit
    data_t [LANES-1:0] s_a, s_b, s_ao, s_acc, g_a, g_b, g_ao, g_acc;
    for (genvar k = 0; k < LANES; k++) begin : g_lane
      localparam int R  = 2*u + k / P_SG;
      localparam int CS = k % P_SG;
      localparam int CG = P_SG + k % P_SG;
      assign s_a[k] = a_mesh_in[R][CS];
      assign s_b[k] = b_mesh_in[R][CS];
      assign g_a[k] = a_mesh_in[R][CG];
      assign g_b[k] = b_mesh_in[R][CG];
      assign a_mesh_out[R][CS] = s_ao[k];
      assign acc_mesh[R][CS]   = s_acc[k];
      assign a_mesh_out[R][CG] = g_ao[k];
      assign acc_mesh[R][CG]   = g_acc[k];
    end

    scatter_unit #(.P_SG(P_SG), .LANES(LANES), .VPB(VPB), .CH_MAX(CH_MAX),
                   .EDGE_DEPTH(EDGE_DEPTH)) u_sc (
      .clk, .rst_n, .mode,
      .sys_op, .sys_a(s_a), .sys_b(s_b), .sys_a_out(s_ao), .sys_acc(s_acc),
      .start(sg_start), .sweep(sg_sweep), .n_edges(sg_n_edges[u]),
      .n_chunks(sg_n_chunks), .sweep_dst(sg_sweep_dst), .done(s_done[u]),
      .edge_rd_en(edge_rd_en[u]), .edge_rd_addr(edge_rd_addr[u]), .edge_rd_data(edge_rd_data[u]),
      .feat_rd_en(src_rd_en[u]), .feat_rd_addr(src_rd_addr[u]), .feat_rd_data(src_rd_data[u]),
      .upd_valid(u_valid[u]), .upd_dst(u_dst[u]), .upd_chunk(u_chunk[u]),
      .upd_data(u_data[u]), .upd_ready(u_ready[u])
    );
    assign u_port[u] = PW'(u_dst[u] >> LVW);
    assign u_pay[u]  = {u_dst[u][LVW-1:0], u_chunk[u], u_data[u]};

    // RAW guard and gather unit of destination bank u
    logic [LVW-1:0] r_row;
    chunk_t         r_chunk;
    data_t [LANES-1:0] r_data, ga_data;
    logic [BAW-1:0] r_addr, ga_addr;
    logic           ga_valid, ga_ready;
    logic [1:0]          busy_v;
    logic [1:0][BAW-1:0] busy_a;
    assign {r_row, r_chunk, r_data} = r_pay[u];
    assign r_addr = BAW'(32'(r_row) * CH_MAX + 32'(r_chunk));

    raw_unit #(.LANES(LANES), .AW(BAW), .INFLIGHT(2)) u_raw (
      .in_valid(r_valid[u]), .in_addr(r_addr), .in_data(r_data), .in_ready(r_ready[u]),
      .out_valid(ga_valid), .out_addr(ga_addr), .out_data(ga_data), .out_ready(ga_ready),
      .busy_valid(busy_v), .busy_addr(busy_a), .stall(raw_stall[u])
    );

    gather_unit #(.P_SG(P_SG), .LANES(LANES), .AW(BAW)) u_ga (
      .clk, .rst_n, .mode, .agg,
      .sys_op, .sys_a(g_a), .sys_b(g_b), .sys_a_out(g_ao), .sys_acc(g_acc),
      .in_valid(ga_valid), .in_addr(ga_addr), .in_data(ga_data), .in_ready(ga_ready),
      .busy_valid(busy_v), .busy_addr(busy_a),
      .rd_en(dst_rd_en[u]), .rd_addr(dst_rd_addr[u]), .rd_data(dst_rd_data[u]),
      .wr_en(dst_wr_en[u]), .wr_addr(dst_wr_addr[u]), .wr_data(dst_wr_data[u]),
      .idle(g_idle[u])
    );
  end

  routing_network #(.PORTS(P_SG), .W(PAYW)) u_net (
    .clk, .rst_n,
    .in_valid(u_valid & {P_SG{mode == MODE_SCATTER_GATHER}}), .in_port(u_port), .in_data(u_pay),
    .in_ready(u_ready),
    .out_valid(r_valid), .out_data(r_pay), .out_ready(r_ready),
    .conflict(sg_conflict)
  );

  assign sg_raw_stall = |raw_stall;
  assign sg_done = (&s_done) && (&g_idle) && !sg_start;
endmodule
