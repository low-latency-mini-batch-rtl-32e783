// pe_tb: runs two target vertices through one PE (reduced size: 4x4 ACK,
// 2 scatter + 2 gather units, 16-vertex subgraphs) with a one-layer GCN-style
// model: FA (sum) -> FT (ReLU) -> readout (max). The second target is loaded
// into the prefetch buffers while the first is computing, and the weights are
// delivered late so the PE must wait for them. Embeddings are compared with
// gnn_ref_pkg; RAW stalls, routing conflicts, mode switches and the weight
// wait must each occur.
module pe_tb;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int P_SYS = 4, P_SG = 2, MAX_V = 16, VPB = 8, CH_MAX = 4;
  localparam int EDGE_DEPTH = 64, FOUT_CH = 2, KT_DEPTH = 8;
  localparam int BAW = $clog2(VPB*CH_MAX), EAW = $clog2(EDGE_DEPTH), ECW = $clog2(EDGE_DEPTH+1);
  localparam int WAW = $clog2(CH_MAX*P_SYS*FOUT_CH), KAW = $clog2(KT_DEPTH);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic kt_wr_en; logic [KAW-1:0] kt_wr_addr; kernel_t kt_wr_data;
  logic ld_en, ld_is_edge; logic [$clog2(P_SG)-1:0] ld_bank; logic [BAW-1:0] ld_faddr;
  data_t [P_SYS-1:0] ld_fdata; logic [EAW-1:0] ld_eaddr; edge_t ld_edata;
  logic commit_en; logic [15:0] commit_tag; logic [VIDX_W:0] commit_nv;
  logic [P_SG-1:0][ECW-1:0] commit_ecount;
  logic pf_free, busy;
  logic out_b = 1;
  chunk_t out_ch = 2;
  logic w_wr_en, w_wr_half, w_commit, w_commit_half; logic [WAW-1:0] w_wr_addr;
  data_t [P_SYS-1:0] w_wr_data; logic [1:0] w_full;
  logic emb_valid, emb_last, emb_ready; logic [15:0] emb_tag; chunk_t emb_chunk;
  data_t [P_SYS-1:0] emb_data;
  logic ev_mode_switch, ev_raw_stall, ev_conflict, ev_weight_wait, ev_kernel_done;

  pe #(.P_SYS(P_SYS), .P_SG(P_SG), .MAX_V(MAX_V), .VPB(VPB), .CH_MAX(CH_MAX),
       .EDGE_DEPTH(EDGE_DEPTH), .FOUT_CH(FOUT_CH), .KT_DEPTH(KT_DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int n_mode = 0, n_raw = 0, n_conf = 0, n_wwait = 0, n_kdone = 0, n_overlap = 0;
  always @(posedge clk) if (rst_n) begin
    n_mode  += int'(ev_mode_switch);
    n_raw   += int'(ev_raw_stall);
    n_conf  += int'(ev_conflict);
    n_wwait += int'(ev_weight_wait);
    n_kdone += int'(ev_kernel_done);
    if (ld_en && busy) n_overlap++;
  end

  gcn_case cs [2];

  task automatic load_case(gcn_case c, int tag);
    int cnt [P_SG];
    foreach (cnt[b]) cnt[b] = 0;
    for (int v = 0; v < c.nv; v++)
      for (int ch = 0; ch < c.fin / P_SYS; ch++) begin
        @(negedge clk);
        ld_en = 1; ld_is_edge = 0; ld_bank = ($clog2(P_SG))'(v / VPB);
        ld_faddr = BAW'((v % VPB) * CH_MAX + ch);
        for (int l = 0; l < P_SYS; l++) ld_fdata[l] = c.h[v][ch*P_SYS + l];
      end
    for (int e = 0; e < c.ne; e++) begin
      int b;
      b = c.esrc[e] / VPB;
      @(negedge clk);
      ld_en = 1; ld_is_edge = 1; ld_bank = ($clog2(P_SG))'(b); ld_eaddr = EAW'(cnt[b]);
      ld_edata = '{src: vidx_t'(c.esrc[e]), dst: vidx_t'(c.edst[e]), weight: c.ew[e]};
      cnt[b]++;
    end
    @(negedge clk);
    ld_en = 0;
    commit_en = 1; commit_tag = 16'(tag); commit_nv = (VIDX_W+1)'(c.nv);
    for (int b = 0; b < P_SG; b++) commit_ecount[b] = ECW'(cnt[b]);
    @(negedge clk);
    commit_en = 0;
  endtask

  task automatic load_weights(gcn_case c);
    for (int kk = 0; kk < c.fin; kk++)
      for (int jc = 0; jc < c.fout / P_SYS; jc++) begin
        @(negedge clk);
        w_wr_en = 1; w_wr_half = 0; w_wr_addr = WAW'(kk * FOUT_CH + jc);
        for (int l = 0; l < P_SYS; l++) w_wr_data[l] = c.w[kk][jc*P_SYS + l];
      end
    @(negedge clk);
    w_wr_en = 0; w_commit = 1; w_commit_half = 0;
    @(negedge clk);
    w_commit = 0;
  endtask

  int got = 0;
  always @(posedge clk) if (rst_n && emb_valid && emb_ready) begin
    int t;
    t = int'(emb_tag);
    for (int l = 0; l < P_SYS; l++) begin
      int idx, expv;
      gcn_case c;
      idx = int'(emb_chunk)*P_SYS + l;
      c = cs[t];
      expv = c.emb[idx];
      checks++;
      if (int'(emb_data[l]) != expv) begin
        failures++;
        $display("MISMATCH tag %0d elem %0d: got %0d exp %0d", t, idx, emb_data[l], expv);
      end
    end
    checks++;
    if (int'(emb_tag) != got) begin failures++; $display("wrong order tag %0d", t); end
    if (emb_last) got++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    kt_wr_en = 0; kt_wr_addr = '0; kt_wr_data = '0; ld_en = 0; ld_is_edge = 0; ld_bank = '0;
    ld_faddr = '0; ld_fdata = '0; ld_eaddr = '0; ld_edata = '0; commit_en = 0; commit_tag = '0;
    commit_nv = '0; commit_ecount = '0; w_wr_en = 0; w_wr_half = 0; w_commit = 0;
    w_commit_half = 0; w_wr_addr = '0; w_wr_data = '0; emb_ready = 1;
    cs[0] = new(16, 8, 8, 40, 1); cs[0].compute();
    cs[1] = new(12, 8, 8, 32, 2); cs[1].w = cs[0].w; cs[1].compute();  // same model weights
    repeat (3) @(negedge clk);
    rst_n = 1;
    // task list: FA(A->B, sum), FT(B->A, ReLU), READOUT(A->B, max)
    @(negedge clk); kt_wr_en = 1; kt_wr_addr = 0;
    kt_wr_data = '{kind: K_FA, src_b: 0, dst_b: 1, agg: AGG_SUM, act: ACT_NONE, whalf: 0,
                   wrelease: 0, in_ch: 2, out_ch: 0, last: 0};
    @(negedge clk); kt_wr_addr = 1;
    kt_wr_data = '{kind: K_FT, src_b: 1, dst_b: 0, agg: AGG_SUM, act: ACT_RELU, whalf: 0,
                   wrelease: 0, in_ch: 2, out_ch: 2, last: 0};
    @(negedge clk); kt_wr_addr = 2;
    kt_wr_data = '{kind: K_READOUT, src_b: 0, dst_b: 1, agg: AGG_MAX, act: ACT_NONE, whalf: 0,
                   wrelease: 0, in_ch: 2, out_ch: 0, last: 1};
    @(negedge clk); kt_wr_en = 0;
    load_case(cs[0], 0);
    // second target into the prefetch buffer while the first runs
    wait (busy && pf_free);
    load_case(cs[1], 1);
    repeat (300) @(negedge clk);
    load_weights(cs[0]);
    // emb_ready back-pressure for a while
    emb_ready = 0;
    repeat (50) @(negedge clk);
    emb_ready = 1;
    wait (got == 2);
    repeat (10) @(negedge clk);
    checks++; if (n_mode == 0)    begin failures++; $display("no mode switch"); end
    checks++; if (n_raw == 0)     begin failures++; $display("no RAW stall"); end
    checks++; if (n_conf == 0)    begin failures++; $display("no routing conflict"); end
    checks++; if (n_wwait == 0)   begin failures++; $display("no weight wait"); end
    checks++; if (n_overlap == 0) begin failures++; $display("no load/compute overlap"); end
    checks++; if (n_kdone != 6)   begin failures++; $display("kernels done %0d", n_kdone); end
    $display("events: mode=%0d raw=%0d conflict=%0d wwait=%0d overlap=%0d", n_mode, n_raw,
             n_conf, n_wwait, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
