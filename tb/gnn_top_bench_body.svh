// Shared body of the accelerator testbenches; the including module defines
// N_PE, P_SYS, P_SG, MAX_V, VPB, CH_MAX, EDGE_DEPTH, FOUT_CH, KT_DEPTH, NT, NV,
// FIN, FOUT, MAXCYC, N_USE (PEs the host hands targets to), and instantiates gnn_accel_top as dut after the include.
  localparam int BAW = $clog2(VPB*CH_MAX), EAW = $clog2(EDGE_DEPTH), ECW = $clog2(EDGE_DEPTH+1);
  localparam int WAW = $clog2(CH_MAX*P_SYS*FOUT_CH), KAW = $clog2(KT_DEPTH);
  localparam int PEW = (N_PE > 1) ? $clog2(N_PE) : 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic kt_wr_en; logic [KAW-1:0] kt_wr_addr; kernel_t kt_wr_data;
  logic out_b; chunk_t out_ch;
  logic ld_en, ld_is_edge; logic [PEW-1:0] ld_pe; logic [$clog2(P_SG)-1:0] ld_bank;
  logic [BAW-1:0] ld_faddr; data_t [P_SYS-1:0] ld_fdata; logic [EAW-1:0] ld_eaddr; edge_t ld_edata;
  logic commit_en; logic [PEW-1:0] commit_pe; logic [15:0] commit_tag; logic [VIDX_W:0] commit_nv;
  logic [P_SG-1:0][ECW-1:0] commit_ecount;
  logic [N_PE-1:0] pe_pf_free, pe_busy;
  logic [N_PE-1:0] w_wr_en, w_wr_half, w_commit, w_commit_half;
  logic [N_PE-1:0][WAW-1:0] w_wr_addr; data_t [N_PE-1:0][P_SYS-1:0] w_wr_data;
  logic [N_PE-1:0][1:0] w_full;
  logic emb_valid, emb_last, emb_ready; logic [PEW-1:0] emb_pe; logic [15:0] emb_tag;
  chunk_t emb_chunk; data_t [P_SYS-1:0] emb_data;
  logic [N_PE-1:0] ev_mode_switch, ev_raw_stall, ev_conflict, ev_weight_wait, ev_kernel_done;


  int checks = 0, failures = 0;
  int n_mode = 0, n_raw = 0, n_conf = 0, n_wwait = 0, n_kdone = 0, n_overlap = 0, n_compete = 0;
  always @(posedge clk) if (rst_n) begin
    n_mode  += $countones(ev_mode_switch);
    n_raw   += $countones(ev_raw_stall);
    n_conf  += $countones(ev_conflict);
    n_wwait += $countones(ev_weight_wait);
    n_kdone += $countones(ev_kernel_done);
    if (ld_en && pe_busy[ld_pe]) n_overlap++;
    if ($countones(dut.p_valid) > 1) n_compete++;
  end

  function automatic logic [N_PE-1:0] pe_valid_view();
    return dut.p_valid;
  endfunction

  gcn_case cs [NT];
  int tgt_pe [NT];

  task automatic load_case(gcn_case c, int tag, int pe);
    int cnt [P_SG];
    foreach (cnt[b]) cnt[b] = 0;
    for (int v = 0; v < c.nv; v++)
      for (int ch = 0; ch < c.fin / P_SYS; ch++) begin
        @(negedge clk);
        ld_en = 1; ld_pe = PEW'(pe); ld_is_edge = 0; ld_bank = ($clog2(P_SG))'(v / VPB);
        ld_faddr = BAW'((v % VPB) * CH_MAX + ch);
        for (int l = 0; l < P_SYS; l++) ld_fdata[l] = c.h[v][ch*P_SYS + l];
      end
    for (int e = 0; e < c.ne; e++) begin
      int b;
      b = c.esrc[e] / VPB;
      @(negedge clk);
      ld_en = 1; ld_pe = PEW'(pe); ld_is_edge = 1; ld_bank = ($clog2(P_SG))'(b);
      ld_eaddr = EAW'(cnt[b]);
      ld_edata = '{src: vidx_t'(c.esrc[e]), dst: vidx_t'(c.edst[e]), weight: c.ew[e]};
      cnt[b]++;
    end
    @(negedge clk);
    ld_en = 0;
    commit_en = 1; commit_pe = PEW'(pe); commit_tag = 16'(tag); commit_nv = (VIDX_W+1)'(c.nv);
    for (int b = 0; b < P_SG; b++) commit_ecount[b] = ECW'(cnt[b]);
    @(negedge clk);
    commit_en = 0;
  endtask

  task automatic load_weights(gcn_case c, int pe);
    for (int kk = 0; kk < c.fin; kk++)
      for (int jc = 0; jc < c.fout / P_SYS; jc++) begin
        @(negedge clk);
        w_wr_en = '0; w_wr_en[pe] = 1; w_wr_half[pe] = 0; w_wr_addr[pe] = WAW'(kk * FOUT_CH + jc);
        for (int l = 0; l < P_SYS; l++) w_wr_data[pe][l] = c.w[kk][jc*P_SYS + l];
      end
    @(negedge clk);
    w_wr_en = '0; w_commit = '0; w_commit[pe] = 1; w_commit_half[pe] = 0;
    @(negedge clk);
    w_commit = '0;
  endtask

  int got = 0, next_chunk = 0, cur_tag = -1;
  int seen [NT];
  always @(posedge clk) if (rst_n && emb_valid && emb_ready) begin
    int t, idx, expv;
    gcn_case c;
    t = int'(emb_tag);
    c = cs[t];
    for (int l = 0; l < P_SYS; l++) begin
      idx = int'(emb_chunk)*P_SYS + l;
      expv = c.emb[idx];
      checks++;
      if (int'(emb_data[l]) != expv) begin
        failures++;
        $display("MISMATCH tag %0d elem %0d: got %0d exp %0d", t, idx, emb_data[l], expv);
      end
    end
    checks++;
    if (int'(emb_pe) != tgt_pe[t]) begin failures++; $display("tag %0d from wrong PE", t); end
    // the beats of one embedding leave back to back, chunk 0 first
    checks++;
    if (int'(emb_chunk) != next_chunk || (next_chunk != 0 && t != cur_tag)) begin
      failures++; $display("tag %0d chunk %0d out of sequence", t, emb_chunk);
    end
    cur_tag = t;
    next_chunk = emb_last ? 0 : int'(emb_chunk) + 1;
    if (emb_last) begin got++; seen[t]++; end
  end

  initial begin
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int lat_start, lat_end;
  initial begin
    int next_pe;
    kt_wr_en = 0; kt_wr_addr = '0; kt_wr_data = '0; ld_en = 0; ld_is_edge = 0; ld_bank = '0;
    ld_pe = '0; ld_faddr = '0; ld_fdata = '0; ld_eaddr = '0; ld_edata = '0; commit_en = 0;
    commit_pe = '0; commit_tag = '0; commit_nv = '0; commit_ecount = '0;
    w_wr_en = '0; w_wr_half = '0; w_commit = '0; w_commit_half = '0; w_wr_addr = '0;
    w_wr_data = '0; emb_ready = 1; out_b = 1; out_ch = chunk_t'(FOUT / P_SYS);
    foreach (seen[t]) seen[t] = 0;
    for (int t = 0; t < NT; t++) begin
      cs[t] = new(NV[t], FIN, FOUT, NV[t] + 2*NV[t], t);
      if (t > 0) cs[t].w = cs[0].w;   // one model for the whole batch
      cs[t].compute();
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // task allocation: FA(A->B, sum), FT(B->A, ReLU), READOUT(A->B, max)
    @(negedge clk); kt_wr_en = 1; kt_wr_addr = 0;
    kt_wr_data = '{kind: K_FA, src_b: 0, dst_b: 1, agg: AGG_SUM, act: ACT_NONE, whalf: 0,
                   wrelease: 0, in_ch: chunk_t'(FIN/P_SYS), out_ch: 0, last: 0};
    @(negedge clk); kt_wr_addr = 1;
    kt_wr_data = '{kind: K_FT, src_b: 1, dst_b: 0, agg: AGG_SUM, act: ACT_RELU, whalf: 0,
                   wrelease: 0, in_ch: chunk_t'(FIN/P_SYS), out_ch: chunk_t'(FOUT/P_SYS), last: 0};
    @(negedge clk); kt_wr_addr = 2;
    kt_wr_data = '{kind: K_READOUT, src_b: 0, dst_b: 1, agg: AGG_MAX, act: ACT_NONE, whalf: 0,
                   wrelease: 0, in_ch: chunk_t'(FIN/P_SYS), out_ch: 0, last: 1};
    @(negedge clk); kt_wr_en = 0;
    // weights: PEs other than 0 at once, PE 0 after its first target has started
    for (int p = 1; p < N_PE; p++) load_weights(cs[0], p);
    lat_start = $time;
    fork
      begin
        for (int t = 0; t < NT; t++) begin
          // pick a PE whose prefetch buffer is free, round robin
          next_pe = t % N_USE;
          while (!pe_pf_free[next_pe]) @(negedge clk);
          tgt_pe[t] = next_pe;
          load_case(cs[t], t, next_pe);
        end
      end
      begin
        // PE 0's weights come only once it is waiting for them
        for (int i = 0; i < 20000 && !ev_weight_wait[0]; i++) @(negedge clk);
        repeat (20) @(negedge clk);
        load_weights(cs[0], 0);
      end
      begin
        // hold the embedding stream until two PEs are waiting on it, then
        // throttle it now and then
        emb_ready = 0;
        for (int i = 0; i < 20000 && $countones(pe_valid_view()) < 2; i++) @(negedge clk);
        while (got < NT) begin
          @(negedge clk);
          emb_ready = ($urandom() % 4) != 0;
        end
        emb_ready = 1;
      end
    join
    lat_end = $time;
    repeat (10) @(negedge clk);
    for (int t = 0; t < NT; t++) begin
      checks++; if (seen[t] != 1) begin failures++; $display("target %0d seen %0d times", t, seen[t]); end
    end
    checks++; if (n_mode == 0)    begin failures++; $display("no mode switch"); end
    checks++; if (n_raw == 0)     begin failures++; $display("no RAW stall"); end
    checks++; if (n_conf == 0)    begin failures++; $display("no routing conflict"); end
    checks++; if (n_wwait == 0)   begin failures++; $display("no weight wait"); end
    checks++; if (n_overlap == 0) begin failures++; $display("no load/compute overlap"); end
    checks++; if (n_compete == 0 && N_PE > 1) begin failures++; $display("no output competition"); end
    checks++; if (n_kdone != 3*NT) begin failures++; $display("kernels done %0d", n_kdone); end
    $display("batch of %0d targets in %0d cycles; events: mode=%0d raw=%0d conflict=%0d wwait=%0d overlap=%0d compete=%0d",
             NT, (lat_end - lat_start) / 10, n_mode, n_raw, n_conf, n_wwait, n_overlap, n_compete);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
