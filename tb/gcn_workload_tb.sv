// gcn_workload_tb: one of the evaluated workloads on the accelerator at its
// default size -- a decoupled GCN with L = 3 layers, a receptive field of
// N = 64 vertices and hidden size f = 256 for every layer (input features 256
// as well). One target vertex is run on PE 0: the kernel table holds
// FA(sum) -> FT(ReLU) three times and a max readout (7 kernels); the three
// 256x256 weight matrices go through the double-buffered Weight Buffer (W1 in
// half 0, W2 in half 1, W3 reloaded into half 0 once layer 1 has released it).
// The embedding is compared bit-exactly with a Q16.16 reference computed here,
// and the cycle count of the whole inference is printed.
module gcn_workload_tb;
  import gnn_pkg::*;

  localparam int L = 3, NV = 64, F = 256, NE = 3*NV, MAXCYC = 600000;
  localparam int P_SYS = DEF_P_SYS, P_SG = P_SYS/2, N_PE = DEF_N_PE, VPB = 256/P_SG, CH_MAX = 38;
  localparam int EDGE_DEPTH = 8192, FOUT_CH = 16, KT_DEPTH = 64, FC = F/P_SYS;
  localparam int BAW = $clog2(VPB*CH_MAX), EAW = $clog2(EDGE_DEPTH), ECW = $clog2(EDGE_DEPTH+1);
  localparam int WAW = $clog2(CH_MAX*P_SYS*FOUT_CH), KAW = $clog2(KT_DEPTH);
  localparam int PEW = $clog2(N_PE);

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

  gnn_accel_top dut (.*);

  int checks = 0, failures = 0, n_kdone = 0, n_mode = 0, got = 0;
  int h [NV][F], z [NV][F], hn [NV][F], h0 [NV][F];  // h: current layer (reference)
  int w [L][F][F];
  int esrc [NE], edst [NE], ew [NE];
  int emb [F];

  function automatic int qm(int a, int b);
    longint p; p = longint'(a) * longint'(b); return int'(p >>> 16);
  endfunction

  always @(posedge clk) if (rst_n) begin
    n_kdone += $countones(ev_kernel_done);
    n_mode  += $countones(ev_mode_switch);
    if (emb_valid && emb_ready) begin
      for (int l = 0; l < P_SYS; l++) begin
        checks++;
        if (int'(emb_data[l]) != emb[int'(emb_chunk)*P_SYS + l]) begin
          failures++;
          $display("MISMATCH elem %0d: got %0d exp %0d", int'(emb_chunk)*P_SYS + l, emb_data[l],
                   emb[int'(emb_chunk)*P_SYS + l]);
        end
      end
      if (emb_last) got++;
    end
  end

  initial begin
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_kernel(int a, kernel_t k);
    @(negedge clk); kt_wr_en = 1; kt_wr_addr = KAW'(a); kt_wr_data = k;
    @(negedge clk); kt_wr_en = 0;
  endtask

  task automatic load_w(int layer, int half);
    for (int kk = 0; kk < F; kk++)
      for (int jc = 0; jc < FC; jc++) begin
        @(negedge clk);
        w_wr_en[0] = 1; w_wr_half[0] = 1'(half); w_wr_addr[0] = WAW'(kk * FOUT_CH + jc);
        for (int l = 0; l < P_SYS; l++) w_wr_data[0][l] = w[layer][kk][jc*P_SYS + l];
      end
    @(negedge clk); w_wr_en[0] = 0; w_commit[0] = 1; w_commit_half[0] = 1'(half);
    @(negedge clk); w_commit[0] = 0;
  endtask

  initial begin
    int t0, t1;
    int cnt [P_SG];
    kt_wr_en = 0; kt_wr_addr = '0; kt_wr_data = '0; ld_en = 0; ld_is_edge = 0; ld_bank = '0;
    ld_pe = '0; ld_faddr = '0; ld_fdata = '0; ld_eaddr = '0; ld_edata = '0; commit_en = 0;
    commit_pe = '0; commit_tag = '0; commit_nv = '0; commit_ecount = '0;
    w_wr_en = '0; w_wr_half = '0; w_commit = '0; w_commit_half = '0; w_wr_addr = '0;
    w_wr_data = '0; emb_ready = 1; out_b = 1; out_ch = chunk_t'(FC);
    // random subgraph and model; edges: self loops, then random ones
    foreach (h[v, k]) h[v][k] = int'($urandom() % (4 << 16)) - (2 << 16);
    foreach (w[i, k, j]) w[i][k][j] = int'($urandom() % (1 << 14)) - (1 << 13);
    for (int e = 0; e < NE; e++) begin
      esrc[e] = (e < NV) ? e : int'($urandom() % NV);
      edst[e] = (e < NV) ? e : int'($urandom() % NV);
      ew[e]   = int'($urandom() % (1 << 15));
    end
    // reference: L x (z = sum_e w_e h_src ; h = relu(z W_l)), then max readout
    for (int i = 0; i < L; i++) begin
      foreach (z[v, k]) z[v][k] = 0;
      for (int e = 0; e < NE; e++)
        for (int k = 0; k < F; k++) z[edst[e]][k] += qm(h[esrc[e]][k], ew[e]);
      for (int v = 0; v < NV; v++)
        for (int j = 0; j < F; j++) begin
          int acc;
          acc = 0;
          for (int k = 0; k < F; k++) acc += qm(z[v][k], w[i][k][j]);
          hn[v][j] = (acc < 0) ? 0 : acc;
        end
      if (i == 0) h0 = h;
      h = hn;
    end
    for (int j = 0; j < F; j++) begin
      emb[j] = 32'h8000_0000;
      for (int v = 0; v < NV; v++) if (h[v][j] > emb[j]) emb[j] = h[v][j];
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // kernel table: per layer FA(A->B) and FT(B->A) with weight half i%2
    for (int i = 0; i < L; i++) begin
      write_kernel(2*i, '{kind: K_FA, src_b: 0, dst_b: 1, agg: AGG_SUM, act: ACT_NONE, whalf: 0,
                          wrelease: 0, in_ch: chunk_t'(FC), out_ch: 0, last: 0});
      write_kernel(2*i+1, '{kind: K_FT, src_b: 1, dst_b: 0, agg: AGG_SUM, act: ACT_RELU, whalf: 1'(i % 2),
                            wrelease: 1, in_ch: chunk_t'(FC), out_ch: chunk_t'(FC), last: 0});
    end
    write_kernel(2*L, '{kind: K_READOUT, src_b: 0, dst_b: 1, agg: AGG_MAX, act: ACT_NONE, whalf: 0,
                        wrelease: 0, in_ch: chunk_t'(FC), out_ch: 0, last: 1});
    t0 = $time;
    fork
      begin
        // subgraph into PE 0's prefetch buffers
        foreach (cnt[b]) cnt[b] = 0;
        for (int v = 0; v < NV; v++)
          for (int ch = 0; ch < FC; ch++) begin
            @(negedge clk);
            ld_en = 1; ld_pe = '0; ld_is_edge = 0; ld_bank = ($clog2(P_SG))'(v / VPB);
            ld_faddr = BAW'((v % VPB) * CH_MAX + ch);
            for (int l = 0; l < P_SYS; l++) ld_fdata[l] = h0[v][ch*P_SYS + l];
          end
        for (int e = 0; e < NE; e++) begin
          @(negedge clk);
          ld_en = 1; ld_is_edge = 1; ld_bank = ($clog2(P_SG))'(esrc[e] / VPB);
          ld_eaddr = EAW'(cnt[esrc[e] / VPB]);
          ld_edata = '{src: vidx_t'(esrc[e]), dst: vidx_t'(edst[e]), weight: ew[e]};
          cnt[esrc[e] / VPB]++;
        end
        @(negedge clk);
        ld_en = 0; commit_en = 1; commit_pe = '0; commit_tag = 16'd0; commit_nv = (VIDX_W+1)'(NV);
        for (int b = 0; b < P_SG; b++) commit_ecount[b] = ECW'(cnt[b]);
        @(negedge clk);
        commit_en = 0;
      end
      begin
        // weights: W1 -> half 0, W2 -> half 1, W3 -> half 0 after layer 1 frees it
        load_w(0, 0);
        load_w(1, 1);
        while (w_full[0][0]) @(negedge clk);
        load_w(2, 0);
      end
    join
    while (got == 0) @(negedge clk);
    t1 = $time;
    repeat (5) @(negedge clk);
    checks++; if (n_kdone != 2*L + 1) begin failures++; $display("kernels done %0d", n_kdone); end
    checks++; if (n_mode < 2*L + 1) begin failures++; $display("mode switches %0d", n_mode); end
    checks++; if (got != 1) begin failures++; $display("embeddings %0d", got); end
    $display("GCN L=%0d N=%0d f=%0d: inference in %0d cycles (%0d us at 300 MHz)",
             L, NV, F, (t1 - t0) / 10, (t1 - t0) / 10 / 300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
