// pe: one Processing Element -- computes the embedding of one target vertex
// at a time from its vertex-induced subgraph (paper Sec. 3.3, 4, Figs. 5, 6).
//
// Contents: the ACK, the triple-buffered Feature/Result Buffer and Edge
// Buffer, the double-buffered Weight Buffer, the Activation Unit, a kernel
// table and the control that runs the table kernel by kernel (paper Alg. 3:
// configure the ACK's mode for the kernel, execute it, next kernel).
//
// Buffer roles: of the three feature/edge buffers one is A (the target's
// input features, then whatever kernels write there), one is B, and one is
// the prefetch buffer that the host loads (ld_* ports) while the PE computes.
// commit_en hands the prefetch buffer over with the target's tag, vertex
// count and per-bank edge counts; when the PE is idle it rotates roles
// (prefetch -> A, A -> B, B -> prefetch) and starts the table at entry 0.
// pf_free says the host may load the prefetch buffer.
//
// Kernels (gnn_pkg::kernel_t):
//   FA      clear the dst rows to aggregate()'s identity, then scatter-gather
//           over all edges; dst row v = aggregate over edges u->v of w*h_u.
//   FT      dst = act(src * W) with W from the Weight Buffer half whalf
//           (waits for that half to be full, frees it if wrelease). For each
//           output chunk jc and input chunk kc: P_SYS cycles of weight load,
//           nv cycles of streaming (one vertex per cycle), 2*P_SYS+2 cycles of
//           drain; partial sums are read back from and written to dst.
//   READOUT clear row 0 of dst, then max/sum/min of all nv rows of src into
//           row 0 of dst (scatter-gather sweep, weight 1).
// After the last kernel the PE sends row 0 of buffer out_b, out_ch chunks,
// on the emb_* valid/ready stream, then goes idle. Vertex v lives in bank
// v / VPB, local row v % VPB. The mode register of the ACK is loaded in a
// dedicated cycle before every kernel (the paper's one-cycle configuration).
// The event outputs pulse for the mechanisms a test wants to see happen.
module pe
  import gnn_pkg::*;
#(
  parameter int P_SYS      = 16,
  parameter int P_SG       = P_SYS/2,
  parameter int MAX_V      = 256,
  parameter int VPB        = MAX_V/P_SG,
  parameter int CH_MAX     = 38,
  parameter int EDGE_DEPTH = 8192,
  parameter int F_MAX      = CH_MAX*P_SYS,
  parameter int FOUT_CH    = 16,
  parameter int KT_DEPTH   = 64,
  parameter int BAW        = $clog2(VPB*CH_MAX),
  parameter int EAW        = $clog2(EDGE_DEPTH),
  parameter int ECW        = $clog2(EDGE_DEPTH+1),
  parameter int WAW        = $clog2(F_MAX*FOUT_CH),
  parameter int KAW        = $clog2(KT_DEPTH)
) (
  input  logic clk,
  input  logic rst_n,
  // kernel table (task allocation by the host)
  input  logic          kt_wr_en,
  input  logic [KAW-1:0] kt_wr_addr,
  input  kernel_t       kt_wr_data,
  input  logic          out_b,        // buffer holding the embedding in row 0
  input  chunk_t        out_ch,
  // input data from QDMA into the prefetch buffer
  input  logic          ld_en,
  input  logic          ld_is_edge,
  input  logic [$clog2(P_SG)-1:0] ld_bank,
  input  logic [BAW-1:0] ld_faddr,
  input  data_t [P_SYS-1:0] ld_fdata,
  input  logic [EAW-1:0] ld_eaddr,
  input  edge_t         ld_edata,
  input  logic          commit_en,
  input  logic [15:0]   commit_tag,
  input  logic [VIDX_W:0] commit_nv,
  input  logic [P_SG-1:0][ECW-1:0] commit_ecount,
  output logic          pf_free,
  output logic          busy,
  // weights from FPGA DDR
  input  logic          w_wr_en,
  input  logic          w_wr_half,
  input  logic [WAW-1:0] w_wr_addr,
  input  data_t [P_SYS-1:0] w_wr_data,
  input  logic          w_commit,
  input  logic          w_commit_half,
  output logic [1:0]    w_full,
  // embedding out
  output logic          emb_valid,
  output logic [15:0]   emb_tag,
  output chunk_t        emb_chunk,
  output logic          emb_last,
  output data_t [P_SYS-1:0] emb_data,
  input  logic          emb_ready,
  // events
  output logic          ev_mode_switch,
  output logic          ev_raw_stall,
  output logic          ev_conflict,
  output logic          ev_weight_wait,
  output logic          ev_kernel_done
);
  localparam int LVW = $clog2(VPB);
  localparam int PW  = $clog2(P_SG);

  typedef enum logic [4:0] {
    S_IDLE, S_KFETCH, S_CFG, S_CLEAR, S_SG_START, S_SG_WAIT,
    S_FT_WCHK, S_FT_LOADW, S_FT_STREAM, S_FT_DRAIN, S_KDONE,
    S_OUT_RD, S_OUT_CAP, S_OUT_HOLD
  } state_e;
  state_e st;

  // ---------------- kernel table ----------------
  kernel_t ktab [KT_DEPTH];
  always_ff @(posedge clk)
    if (kt_wr_en) ktab[kt_wr_addr] <= kt_wr_data;

  // ---------------- roles and job ----------------
  logic [1:0] pA, pB, pPF;
  logic       pf_full;
  logic [15:0] pf_tag, job_tag;
  logic [VIDX_W:0] pf_nv, job_nv;
  logic [P_SG-1:0][ECW-1:0] pf_ec, job_ec;

  kernel_t k;
  logic [KAW-1:0] kidx;
  logic [1:0] srcP, dstP;
  assign srcP = k.src_b ? pB : pA;
  assign dstP = k.dst_b ? pB : pA;

  // counters
  logic [LVW:0]   clr_row;
  chunk_t         clr_ch, kc, jc, oc;
  logic [VIDX_W:0] v;
  logic [$clog2(P_SYS+1)-1:0] li;
  logic [7:0]     dcnt;
  logic [LVW:0]   clr_rows;
  logic           clr_bank0_only;

  // ACK interface
  ack_mode_e ack_mode;
  logic      cfg_valid;
  alu_op_e   sys_op;
  logic      sys_in_valid, sys_out_valid;
  logic [VIDX_W-1:0] sys_out_tag;
  data_t [P_SYS-1:0] sys_west, sys_north, sys_out;
  logic      sg_start, sg_done, sg_conflict, sg_raw_stall;
  logic [P_SG-1:0][ECW-1:0] sg_n_edges;
  logic [P_SG-1:0]            a_edge_rd_en, a_src_rd_en, a_dst_rd_en, a_dst_wr_en;
  logic [P_SG-1:0][EAW-1:0]   a_edge_rd_addr;
  logic [P_SG-1:0][BAW-1:0]   a_src_rd_addr, a_dst_rd_addr, a_dst_wr_addr;
  edge_t [P_SG-1:0]           edge_rd_data;
  data_t [P_SG-1:0][P_SYS-1:0] src_rd_data, dst_rd_data, a_dst_wr_data;

  // buffer ports after the PE's multiplexing
  logic [1:0] fb_src_sel, fb_dst_sel;
  logic [P_SG-1:0]            fb_src_rd_en, fb_dst_rd_en, fb_dst_wr_en;
  logic [P_SG-1:0][BAW-1:0]   fb_src_rd_addr, fb_dst_rd_addr, fb_dst_wr_addr;
  data_t [P_SG-1:0][P_SYS-1:0] fb_dst_wr_data;

  // FT pipeline registers
  logic ld_q, st_q;
  logic [VIDX_W-1:0] v_q;
  logic [PW-1:0]     bank_q;
  logic              kc0_q;
  logic              act_valid;
  logic [VIDX_W-1:0] act_tag;
  data_t [P_SYS-1:0] act_data;
  data_t [P_SYS-1:0] w_rd_data;
  logic              w_rd_en;
  logic [WAW-1:0]    w_rd_addr;
  logic              w_release;

  // ---------------- control FSM ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      pA <= 2'd0; pB <= 2'd1; pPF <= 2'd2; pf_full <= 1'b0;
      pf_tag <= '0; pf_nv <= '0; pf_ec <= '0;
      job_tag <= '0; job_nv <= '0; job_ec <= '0;
      k <= '0; kidx <= '0;
      clr_row <= '0; clr_ch <= '0; kc <= '0; jc <= '0; oc <= '0; v <= '0; li <= '0; dcnt <= '0;
      clr_rows <= '0; clr_bank0_only <= 1'b0;
      emb_valid <= 1'b0; emb_data <= '0;
      ld_q <= 1'b0; st_q <= 1'b0; v_q <= '0; bank_q <= '0; kc0_q <= 1'b0;
    end else begin
      ld_q <= 1'b0;
      st_q <= 1'b0;
      if (commit_en) begin
        pf_full <= 1'b1; pf_tag <= commit_tag; pf_nv <= commit_nv; pf_ec <= commit_ecount;
      end
      case (st)
        S_IDLE: if (pf_full) begin
          pA <= pPF; pB <= pA; pPF <= pB;
          pf_full <= 1'b0;
          job_tag <= pf_tag; job_nv <= pf_nv; job_ec <= pf_ec;
          kidx <= '0;
          st <= S_KFETCH;
        end
        S_KFETCH: begin
          k <= ktab[kidx];
          st <= S_CFG;
        end
        S_CFG: begin
          clr_row <= '0; clr_ch <= '0; kc <= '0; jc <= '0;
          if (k.kind == K_FT) st <= S_FT_WCHK;
          else begin
            clr_bank0_only <= (k.kind == K_READOUT);
            clr_rows <= (k.kind == K_READOUT) ? (LVW+1)'(1)
                      : ((job_nv > (VIDX_W+1)'(VPB)) ? (LVW+1)'(VPB) : (LVW+1)'(job_nv));
            st <= S_CLEAR;
          end
        end
        S_CLEAR: begin
          if (clr_ch == k.in_ch - 1'b1) begin
            clr_ch <= '0;
            if (clr_row == clr_rows - 1'b1) st <= S_SG_START;
            else clr_row <= clr_row + 1'b1;
          end else clr_ch <= clr_ch + 1'b1;
        end
        S_SG_START: st <= S_SG_WAIT;
        S_SG_WAIT:  if (sg_done) st <= S_KDONE;
        S_FT_WCHK:  if (w_full[k.whalf]) begin li <= '0; st <= S_FT_LOADW; end
        S_FT_LOADW: begin
          ld_q <= 1'b1;
          if (li == ($bits(li))'(P_SYS-1)) begin v <= '0; st <= S_FT_STREAM; end
          li <= li + 1'b1;
        end
        S_FT_STREAM: begin
          st_q <= 1'b1;
          v_q <= v[VIDX_W-1:0];
          bank_q <= PW'(v >> LVW);
          kc0_q <= (kc == '0);
          if (v == job_nv - 1'b1) begin dcnt <= 8'(2*P_SYS+2); st <= S_FT_DRAIN; end
          v <= v + 1'b1;
        end
        S_FT_DRAIN: begin
          if (dcnt == 0) begin
            li <= '0;
            if (kc == k.in_ch - 1'b1) begin
              kc <= '0;
              if (jc == k.out_ch - 1'b1) st <= S_KDONE;
              else begin jc <= jc + 1'b1; st <= S_FT_LOADW; end
            end else begin
              kc <= kc + 1'b1; st <= S_FT_LOADW;
            end
          end else dcnt <= dcnt - 1'b1;
        end
        S_KDONE: begin
          if (k.last) begin oc <= '0; st <= S_OUT_RD; end
          else begin kidx <= kidx + 1'b1; st <= S_KFETCH; end
        end
        S_OUT_RD:  st <= S_OUT_CAP;
        S_OUT_CAP: begin
          emb_valid <= 1'b1;
          emb_data  <= src_rd_data[0];
          st <= S_OUT_HOLD;
        end
        S_OUT_HOLD: if (emb_ready) begin
          emb_valid <= 1'b0;
          if (oc == out_ch - 1'b1) st <= S_IDLE;
          else begin oc <= oc + 1'b1; st <= S_OUT_RD; end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy     = (st != S_IDLE);
  assign pf_free  = !pf_full;
  assign emb_tag  = job_tag;
  assign emb_chunk = oc;
  assign emb_last = (oc == out_ch - 1'b1);

  // ACK configuration: one cycle per kernel
  assign cfg_valid = (st == S_CFG);
  assign ev_mode_switch = cfg_valid &&
                          (ack_mode != ((k.kind == K_FT) ? MODE_SYSTOLIC : MODE_SCATTER_GATHER));
  assign ev_weight_wait = (st == S_FT_WCHK) && !w_full[k.whalf];
  assign ev_kernel_done = (st == S_KDONE);
  assign ev_raw_stall   = sg_raw_stall;
  assign ev_conflict    = sg_conflict && ack_mode == MODE_SCATTER_GATHER;

  assign sg_start = (st == S_SG_START);
  always_comb begin
    for (int u = 0; u < P_SG; u++) begin
      if (k.kind == K_READOUT) begin
        // rows of bank u that hold vertices
        if (32'(job_nv) >= (u+1)*VPB)   sg_n_edges[u] = ECW'(VPB);
        else if (32'(job_nv) > u*VPB)   sg_n_edges[u] = ECW'(32'(job_nv) - u*VPB);
        else                            sg_n_edges[u] = '0;
      end else sg_n_edges[u] = job_ec[u];
    end
  end

  // weight buffer: row k = kc*P_SYS + (P_SYS-1-li) of output chunk jc
  assign w_rd_en   = (st == S_FT_LOADW);
  assign w_rd_addr = WAW'((32'(kc)*P_SYS + (P_SYS-1-32'(li))) * FOUT_CH + 32'(jc));
  assign w_release = (st == S_KDONE) && k.kind == K_FT && k.wrelease;

  // systolic inputs: arrive one cycle after the buffer reads
  assign sys_op       = ld_q ? ALU_LOADW : ALU_MAC;
  assign sys_in_valid = st_q;
  assign sys_west     = src_rd_data[bank_q];
  always_comb begin
    if (ld_q)       sys_north = w_rd_data;
    else if (kc0_q) sys_north = '0;
    else            sys_north = dst_rd_data[bank_q];
  end

  // ---------------- buffer port multiplexing ----------------
  logic [PW-1:0] vbank;
  logic [BAW-1:0] vaddr_src, vaddr_dst;
  assign vbank     = PW'(v >> LVW);
  assign vaddr_src = BAW'(32'(v[LVW-1:0]) * CH_MAX + 32'(kc));
  assign vaddr_dst = BAW'(32'(v[LVW-1:0]) * CH_MAX + 32'(jc));

  always_comb begin
    fb_src_sel     = srcP;
    fb_dst_sel     = dstP;
    fb_src_rd_en   = a_src_rd_en;
    fb_src_rd_addr = a_src_rd_addr;
    fb_dst_rd_en   = a_dst_rd_en;
    fb_dst_rd_addr = a_dst_rd_addr;
    fb_dst_wr_en   = a_dst_wr_en;
    fb_dst_wr_addr = a_dst_wr_addr;
    fb_dst_wr_data = a_dst_wr_data;
    if (st == S_IDLE || st == S_KFETCH) begin
      fb_src_sel = pA; fb_dst_sel = pB;
      fb_src_rd_en = '0; fb_dst_rd_en = '0; fb_dst_wr_en = '0;
    end else if (st == S_CLEAR) begin
      fb_src_rd_en = '0; fb_dst_rd_en = '0;
      for (int b = 0; b < P_SG; b++) begin
        fb_dst_wr_en[b]   = !clr_bank0_only || b == 0;
        fb_dst_wr_addr[b] = BAW'(32'(clr_row) * CH_MAX + 32'(clr_ch));
        fb_dst_wr_data[b] = {P_SYS{agg_identity(k.agg)}};
      end
    end else if (st == S_OUT_RD || st == S_OUT_CAP || st == S_OUT_HOLD) begin
      fb_src_sel = out_b ? pB : pA;
      fb_dst_sel = out_b ? pA : pB;
      fb_src_rd_en = '0; fb_dst_rd_en = '0; fb_dst_wr_en = '0;
      fb_src_rd_en[0]   = (st == S_OUT_RD);
      fb_src_rd_addr[0] = BAW'(oc);
    end else if (k.kind == K_FT && ack_mode == MODE_SYSTOLIC) begin
      fb_src_rd_en = '0; fb_dst_rd_en = '0; fb_dst_wr_en = '0;
      for (int b = 0; b < P_SG; b++) begin
        fb_src_rd_en[b]   = (st == S_FT_STREAM) && 32'(vbank) == b;
        fb_src_rd_addr[b] = vaddr_src;
        fb_dst_rd_en[b]   = (st == S_FT_STREAM) && 32'(vbank) == b && kc != '0;
        fb_dst_rd_addr[b] = vaddr_dst;
        fb_dst_wr_en[b]   = act_valid && (32'(act_tag >> LVW) == b);
        fb_dst_wr_addr[b] = BAW'(32'(act_tag[LVW-1:0]) * CH_MAX + 32'(jc));
        fb_dst_wr_data[b] = act_data;
      end
    end
  end

  // ---------------- datapath ----------------
  ack #(.P_SYS(P_SYS), .P_SG(P_SG), .VPB(VPB), .CH_MAX(CH_MAX), .EDGE_DEPTH(EDGE_DEPTH),
        .TAG_W(VIDX_W)) u_ack (
    .clk, .rst_n,
    .cfg_valid, .cfg_mode((k.kind == K_FT) ? MODE_SYSTOLIC : MODE_SCATTER_GATHER),
    .cfg_agg(k.agg), .mode(ack_mode),
    .sys_op, .sys_in_valid, .sys_in_tag(v_q), .sys_west, .sys_north,
    .sys_out_valid, .sys_out_tag, .sys_out,
    .sg_start, .sg_sweep(k.kind == K_READOUT), .sg_n_edges, .sg_n_chunks(k.in_ch),
    .sg_sweep_dst('0), .sg_done, .sg_conflict, .sg_raw_stall,
    .edge_rd_en(a_edge_rd_en), .edge_rd_addr(a_edge_rd_addr), .edge_rd_data,
    .src_rd_en(a_src_rd_en), .src_rd_addr(a_src_rd_addr), .src_rd_data,
    .dst_rd_en(a_dst_rd_en), .dst_rd_addr(a_dst_rd_addr), .dst_rd_data,
    .dst_wr_en(a_dst_wr_en), .dst_wr_addr(a_dst_wr_addr), .dst_wr_data(a_dst_wr_data)
  );

  activation_unit #(.LANES(P_SYS), .TAG_W(VIDX_W)) u_act (
    .clk, .rst_n,
    .act((kc == k.in_ch - 1'b1) ? k.act : ACT_NONE),
    .in_valid(sys_out_valid), .in_tag(sys_out_tag), .in_data(sys_out),
    .out_valid(act_valid), .out_tag(act_tag), .out_data(act_data)
  );

  feature_buffer #(.NBUF(3), .P_SYS(P_SYS), .P_SG(P_SG), .VPB(VPB), .CH_MAX(CH_MAX)) u_fb (
    .clk, .rst_n,
    .src_sel(fb_src_sel), .src_rd_en(fb_src_rd_en), .src_rd_addr(fb_src_rd_addr), .src_rd_data,
    .dst_sel(fb_dst_sel), .dst_rd_en(fb_dst_rd_en), .dst_rd_addr(fb_dst_rd_addr), .dst_rd_data,
    .dst_wr_en(fb_dst_wr_en), .dst_wr_addr(fb_dst_wr_addr), .dst_wr_data(fb_dst_wr_data),
    .ld_sel(pPF), .ld_en(ld_en && !ld_is_edge), .ld_bank, .ld_addr(ld_faddr), .ld_data(ld_fdata)
  );

  edge_buffer #(.NBUF(3), .P_SG(P_SG), .EDGE_DEPTH(EDGE_DEPTH)) u_eb (
    .clk, .rst_n,
    .rd_sel(pA), .rd_en(a_edge_rd_en), .rd_addr(a_edge_rd_addr), .rd_data(edge_rd_data),
    .ld_sel(pPF), .ld_en(ld_en && ld_is_edge), .ld_bank, .ld_addr(ld_eaddr), .ld_data(ld_edata)
  );

  weight_buffer #(.P_SYS(P_SYS), .F_MAX(F_MAX), .FOUT_CH(FOUT_CH)) u_wb (
    .clk, .rst_n,
    .wr_en(w_wr_en), .wr_half(w_wr_half), .wr_addr(w_wr_addr), .wr_data(w_wr_data),
    .wr_commit(w_commit), .commit_half(w_commit_half),
    .rd_en(w_rd_en), .rd_half(k.whalf), .rd_addr(w_rd_addr), .rd_data(w_rd_data),
    .release_en(w_release), .release_half(k.whalf), .full(w_full)
  );

  a_no_load_when_full: assert property (@(posedge clk) disable iff (!rst_n) ld_en |-> !pf_full);
  a_emb_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 emb_valid && !emb_ready |=> emb_valid && $stable(emb_data));
endmodule
