// ack_tb: the Adaptive Computation Kernel in both modes.
// Systolic: loads a random P_SYS x P_SYS weight tile, streams random vertices
// one per cycle with gaps, and checks sys_out = north + W^T*west bit-exactly,
// the tag, and that every result appears exactly 2*P_SYS-1 cycles after its
// input. Scatter-gather: random edge lists in every bank, SUM then MAX
// aggregation into destination bank models, checked against a reference;
// routing conflicts and RAW stalls must be seen. Mode switches are checked to
// take effect one cycle after cfg_valid.
module ack_tb;
  import gnn_pkg::*;
  localparam int P_SYS = 4, P_SG = 2, VPB = 4, CH_MAX = 2, EDGE_DEPTH = 16, TAG_W = 8;
  localparam int BAW = $clog2(VPB*CH_MAX), EAW = $clog2(EDGE_DEPTH), ECW = $clog2(EDGE_DEPTH+1);
  localparam int BD = VPB*CH_MAX;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_valid; ack_mode_e cfg_mode, mode; agg_op_e cfg_agg;
  alu_op_e sys_op; logic sys_in_valid, sys_out_valid; logic [TAG_W-1:0] sys_in_tag, sys_out_tag;
  data_t [P_SYS-1:0] sys_west, sys_north, sys_out;
  logic sg_start, sg_sweep, sg_done, sg_conflict, sg_raw_stall;
  logic [P_SG-1:0][ECW-1:0] sg_n_edges; chunk_t sg_n_chunks; vidx_t sg_sweep_dst;
  logic [P_SG-1:0] edge_rd_en, src_rd_en, dst_rd_en, dst_wr_en;
  logic [P_SG-1:0][EAW-1:0] edge_rd_addr; edge_t [P_SG-1:0] edge_rd_data;
  logic [P_SG-1:0][BAW-1:0] src_rd_addr, dst_rd_addr, dst_wr_addr;
  data_t [P_SG-1:0][P_SYS-1:0] src_rd_data, dst_rd_data, dst_wr_data;
  ack #(.P_SYS(P_SYS), .P_SG(P_SG), .VPB(VPB), .CH_MAX(CH_MAX), .EDGE_DEPTH(EDGE_DEPTH), .TAG_W(TAG_W)) dut (.*);

  int checks = 0, failures = 0, n_conf = 0, n_raw = 0, cyc = 0;
  edge_t emem [P_SG][EDGE_DEPTH];
  data_t [P_SYS-1:0] smem [P_SG][BD], dmem [P_SG][BD], rmem [P_SG][BD];
  int exp_cyc [$]; logic [TAG_W-1:0] exp_tag [$]; data_t [P_SYS-1:0] exp_out [$];

  for (genvar b = 0; b < P_SG; b++) begin : g_mem
    always_ff @(posedge clk) begin
      if (edge_rd_en[b]) edge_rd_data[b] <= emem[b][edge_rd_addr[b]];
      if (src_rd_en[b])  src_rd_data[b]  <= smem[b][src_rd_addr[b]];
      if (dst_rd_en[b])  dst_rd_data[b]  <= dmem[b][dst_rd_addr[b]];
      if (dst_wr_en[b])  dmem[b][dst_wr_addr[b]] <= dst_wr_data[b];
    end
  end
  always @(posedge clk) begin
    cyc++;
    n_conf += int'(sg_conflict); n_raw += int'(sg_raw_stall);
    if (rst_n && sys_out_valid && mode == MODE_SYSTOLIC) begin
      checks++;
      if (exp_cyc.size() == 0) begin failures++; $display("unexpected systolic output"); end
      else begin
        int c0; logic [TAG_W-1:0] tg; data_t [P_SYS-1:0] o;
        c0 = exp_cyc.pop_front(); tg = exp_tag.pop_front(); o = exp_out.pop_front();
        if (cyc - c0 != 2*P_SYS - 1) begin failures++; $display("latency %0d", cyc - c0); end
        if (sys_out_tag != tg || sys_out != o) begin failures++; $display("systolic result mismatch tag %0d", tg); end
      end
    end
  end
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int qm(int x, int y);
    longint p; p = longint'(x) * longint'(y); return int'(p >>> 16);
  endfunction

  task automatic set_mode(ack_mode_e m, agg_op_e a);
    @(negedge clk); cfg_valid = 1; cfg_mode = m; cfg_agg = a;
    @(negedge clk); cfg_valid = 0;
    checks++; if (mode != m) begin failures++; $display("mode not switched in one cycle"); end
  endtask

  initial begin
    data_t W [P_SYS][P_SYS];
    cfg_valid = 0; cfg_mode = MODE_SYSTOLIC; cfg_agg = AGG_SUM;
    sys_op = ALU_NOP; sys_in_valid = 0; sys_in_tag = '0; sys_west = '0; sys_north = '0;
    sg_start = 0; sg_sweep = 0; sg_n_edges = '0; sg_n_chunks = chunk_t'(1); sg_sweep_dst = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // ---------------- systolic ----------------
    for (int t = 0; t < 3; t++) begin
      set_mode(MODE_SYSTOLIC, AGG_SUM);
      foreach (W[i, j]) W[i][j] = data_t'(int'($urandom()) >>> 14);
      for (int i = 0; i < P_SYS; i++) begin
        @(negedge clk); sys_op = ALU_LOADW; sys_in_valid = 0;
        for (int j = 0; j < P_SYS; j++) sys_north[j] = W[P_SYS-1-i][j];
      end
      for (int v = 0; v < 40; v++) begin
        @(negedge clk); sys_op = ALU_MAC;
        sys_in_valid = ($urandom() % 4) != 0; sys_in_tag = TAG_W'($urandom());
        for (int i = 0; i < P_SYS; i++) sys_west[i] = data_t'(int'($urandom()) >>> 12);
        for (int j = 0; j < P_SYS; j++) sys_north[j] = data_t'(int'($urandom()) >>> 12);
        if (sys_in_valid) begin
          data_t [P_SYS-1:0] o;
          for (int j = 0; j < P_SYS; j++) begin
            o[j] = sys_north[j];
            for (int i = 0; i < P_SYS; i++) o[j] = o[j] + qm(sys_west[i], W[i][j]);
          end
          exp_cyc.push_back(cyc + 1); exp_tag.push_back(sys_in_tag); exp_out.push_back(o);
        end
      end
      @(negedge clk); sys_in_valid = 0;
      repeat (3*P_SYS) @(negedge clk);
      sys_op = ALU_NOP;
      checks++; if (exp_cyc.size() != 0) begin failures++; $display("%0d systolic results missing", exp_cyc.size()); end
    end
    // ---------------- scatter-gather ----------------
    for (int t = 0; t < 4; t++) begin
      agg_op_e a; int nc;
      a = (t % 2) ? AGG_MAX : AGG_SUM; nc = 1 + $urandom() % CH_MAX;
      set_mode(MODE_SCATTER_GATHER, a);
      for (int b = 0; b < P_SG; b++) for (int r = 0; r < BD; r++) begin
        for (int l = 0; l < P_SYS; l++) begin
          smem[b][r][l] = data_t'(int'($urandom()) >>> 12);
          dmem[b][r][l] = agg_identity(a); rmem[b][r][l] = agg_identity(a);
        end
      end
      for (int b = 0; b < P_SG; b++) begin
        int ne; ne = 1 + $urandom() % EDGE_DEPTH;
        sg_n_edges[b] = ECW'(ne);
        for (int e = 0; e < ne; e++) begin
          int sr, d;
          sr = $urandom() % VPB; d = $urandom() % (P_SG*VPB);
          // few destinations so that hazards and conflicts are common
          if ($urandom() % 2) d = 0;
          emem[b][e].src = vidx_t'(b*VPB + sr); emem[b][e].dst = vidx_t'(d);
          emem[b][e].weight = data_t'($urandom() % 65536);
          for (int c = 0; c < nc; c++) for (int l = 0; l < P_SYS; l++) begin
            data_t m, o;
            m = qm(smem[b][sr*CH_MAX + c][l], emem[b][e].weight);
            o = rmem[d / VPB][(d % VPB)*CH_MAX + c][l];
            rmem[d / VPB][(d % VPB)*CH_MAX + c][l] = (a == AGG_SUM) ? o + m : ((m > o) ? m : o);
          end
        end
      end
      @(negedge clk); sg_n_chunks = chunk_t'(nc); sg_start = 1;
      @(negedge clk); sg_start = 0;
      @(negedge clk);
      wait (sg_done);
      @(negedge clk);
      for (int b = 0; b < P_SG; b++) for (int r = 0; r < BD; r++) begin
        checks++; if (dmem[b][r] != rmem[b][r]) begin failures++; $display("sg bank %0d row %0d mismatch", b, r); end
      end
    end
    checks++; if (n_conf == 0) begin failures++; $display("no routing conflict"); end
    checks++; if (n_raw == 0) begin failures++; $display("no RAW stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
