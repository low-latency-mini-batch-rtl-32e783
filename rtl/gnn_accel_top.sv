// gnn_accel_top: the FPGA accelerator for low-latency mini-batch inference of
// decoupled GNNs -- N_PE independent Processing Elements, each computing the
// embedding of one target vertex at a time (paper Sec. 3.3, 4; Figs. 5, 21).
//
// Defaults follow the paper's Alveo U250 design point: N_PE = 8 (2 per SLR,
// 4 SLRs), p_sys = 16 (16x16 ALUs per ACK, 8 scatter and 8 gather units,
// 8-port butterfly with 512-bit ports), derived in gnn_pkg by the paper's
// design-space formulas. Sizes the paper leaves open are this design's:
// subgraphs of up to MAX_V = 256 vertices (largest receptive field evaluated),
// feature vectors up to CH_MAX*16 = 608 elements (Reddit has 602 inputs),
// up to FOUT_CH*16 = 256 outputs per transformation (the evaluated hidden
// size), 8192 edges per edge bank, 64 kernels per model.
//
// The host side (neighbour identification, subgraph building, task
// allocation), QDMA/PCIe and the FPGA DDR are outside; their traffic appears
// as ports:
//   * load bus (ld_*, commit_*): QDMA writes a target's features and edges
//     into the prefetch buffers of PE ld_pe and commits them; pe_pf_free[i]
//     tells the host PE i can take the next target (the scheduling of the
//     paper's Fig. 10: a PE's next input is loaded while it computes).
//   * kernel table (kt_*): the task list of the selected model, broadcast to
//     all PEs; out_b/out_ch say where the embedding is left.
//   * w_* per PE: weight matrices from DDR into the double-buffered Weight
//     Buffers.
//   * emb_*: embeddings back to the host, chunk by chunk. A round-robin arbiter
//     grants one PE at a time and keeps the grant until that embedding's last
//     chunk has been taken.
//
// rst_n is an asynchronous active-low reset for every flop. Lint may report
// it as used both asynchronously and synchronously: the "synchronous" use is
// the disable condition of the concurrent assertions in the PEs and buffers,
// which is simulation-only checking, not a reset path in the circuit.
module gnn_accel_top
  import gnn_pkg::*;
#(
  parameter int N_PE       = DEF_N_PE,
  parameter int P_SYS      = DEF_P_SYS,
  parameter int P_SG       = P_SYS/2,
  parameter int MAX_V      = 256,
  parameter int VPB        = MAX_V/P_SG,
  parameter int CH_MAX     = 38,
  parameter int EDGE_DEPTH = 8192,
  parameter int FOUT_CH    = 16,
  parameter int KT_DEPTH   = 64,
  parameter int BAW        = $clog2(VPB*CH_MAX),
  parameter int EAW        = $clog2(EDGE_DEPTH),
  parameter int ECW        = $clog2(EDGE_DEPTH+1),
  parameter int WAW        = $clog2(CH_MAX*P_SYS*FOUT_CH),
  parameter int KAW        = $clog2(KT_DEPTH),
  parameter int PEW        = (N_PE > 1) ? $clog2(N_PE) : 1
) (
  input  logic clk,
  input  logic rst_n,
  // task allocation
  input  logic           kt_wr_en,
  input  logic [KAW-1:0] kt_wr_addr,
  input  kernel_t        kt_wr_data,
  input  logic           out_b,
  input  chunk_t         out_ch,
  // QDMA load bus
  input  logic           ld_en,
  input  logic [PEW-1:0] ld_pe,
  input  logic           ld_is_edge,
  input  logic [$clog2(P_SG)-1:0] ld_bank,
  input  logic [BAW-1:0] ld_faddr,
  input  data_t [P_SYS-1:0] ld_fdata,
  input  logic [EAW-1:0] ld_eaddr,
  input  edge_t          ld_edata,
  input  logic           commit_en,
  input  logic [PEW-1:0] commit_pe,
  input  logic [15:0]    commit_tag,
  input  logic [VIDX_W:0] commit_nv,
  input  logic [P_SG-1:0][ECW-1:0] commit_ecount,
  output logic [N_PE-1:0] pe_pf_free,
  output logic [N_PE-1:0] pe_busy,
  // FPGA DDR weight ports, one per PE
  input  logic [N_PE-1:0]            w_wr_en,
  input  logic [N_PE-1:0]            w_wr_half,
  input  logic [N_PE-1:0][WAW-1:0]   w_wr_addr,
  input  data_t [N_PE-1:0][P_SYS-1:0] w_wr_data,
  input  logic [N_PE-1:0]            w_commit,
  input  logic [N_PE-1:0]            w_commit_half,
  output logic [N_PE-1:0][1:0]       w_full,
  // embeddings to the host
  output logic           emb_valid,
  output logic [PEW-1:0] emb_pe,
  output logic [15:0]    emb_tag,
  output chunk_t         emb_chunk,
  output logic           emb_last,
  output data_t [P_SYS-1:0] emb_data,
  input  logic           emb_ready,
  // mechanism events, per PE
  output logic [N_PE-1:0] ev_mode_switch,
  output logic [N_PE-1:0] ev_raw_stall,
  output logic [N_PE-1:0] ev_conflict,
  output logic [N_PE-1:0] ev_weight_wait,
  output logic [N_PE-1:0] ev_kernel_done
);
  logic [N_PE-1:0]            p_valid, p_last, p_ready;
  logic [N_PE-1:0][15:0]      p_tag;
  chunk_t [N_PE-1:0]          p_chunk;
  data_t [N_PE-1:0][P_SYS-1:0] p_data;

  for (genvar i = 0; i < N_PE; i++) begin : g_pe
    pe #(.P_SYS(P_SYS), .P_SG(P_SG), .MAX_V(MAX_V), .VPB(VPB), .CH_MAX(CH_MAX),
         .EDGE_DEPTH(EDGE_DEPTH), .FOUT_CH(FOUT_CH), .KT_DEPTH(KT_DEPTH)) u_pe (
      .clk, .rst_n,
      .kt_wr_en, .kt_wr_addr, .kt_wr_data, .out_b, .out_ch,
      .ld_en(ld_en && ld_pe == PEW'(i)), .ld_is_edge, .ld_bank, .ld_faddr, .ld_fdata,
      .ld_eaddr, .ld_edata,
      .commit_en(commit_en && commit_pe == PEW'(i)), .commit_tag, .commit_nv, .commit_ecount,
      .pf_free(pe_pf_free[i]), .busy(pe_busy[i]),
      .w_wr_en(w_wr_en[i]), .w_wr_half(w_wr_half[i]), .w_wr_addr(w_wr_addr[i]),
      .w_wr_data(w_wr_data[i]), .w_commit(w_commit[i]), .w_commit_half(w_commit_half[i]),
      .w_full(w_full[i]),
      .emb_valid(p_valid[i]), .emb_tag(p_tag[i]), .emb_chunk(p_chunk[i]), .emb_last(p_last[i]),
      .emb_data(p_data[i]), .emb_ready(p_ready[i]),
      .ev_mode_switch(ev_mode_switch[i]), .ev_raw_stall(ev_raw_stall[i]),
      .ev_conflict(ev_conflict[i]), .ev_weight_wait(ev_weight_wait[i]),
      .ev_kernel_done(ev_kernel_done[i])
    );
  end

  // ---------------- embedding return arbiter ----------------
  logic           locked;
  logic [PEW-1:0] grant, last_grant, pick;
  logic           any;
  always_comb begin
    any  = 1'b0;
    pick = last_grant;
    for (int n = 1; n <= N_PE; n++) begin
      logic [PEW-1:0] idx;
      idx = PEW'((32'(last_grant) + n) % N_PE);
      if (!any && p_valid[idx]) begin any = 1'b1; pick = idx; end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0; grant <= '0; last_grant <= PEW'(N_PE-1);
    end else if (!locked) begin
      if (any) begin locked <= 1'b1; grant <= pick; end
    end else if (emb_valid && emb_ready && emb_last) begin
      locked <= 1'b0; last_grant <= grant;
    end
  end

  assign emb_valid = locked && p_valid[grant];
  assign emb_pe    = grant;
  assign emb_tag   = p_tag[grant];
  assign emb_chunk = p_chunk[grant];
  assign emb_last  = p_last[grant];
  assign emb_data  = p_data[grant];
  always_comb begin
    p_ready = '0;
    p_ready[grant] = locked && emb_ready;
  end
endmodule
