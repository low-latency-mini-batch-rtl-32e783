// scatter_unit_tb: a scatter unit walks a random edge list of its bank and,
// for every edge and feature chunk, emits src_feature * edge_weight towards
// dst. Checks the update stream in order (dst, chunk, data) under random
// back-pressure, then the sweep mode (weight 1, sources 0..n-1, one dst) used
// for readout, and that done rises only after the last update left.
module scatter_unit_tb;
  import gnn_pkg::*;
  localparam int P_SG = 2, LANES = 2*P_SG, VPB = 8, CH_MAX = 4, EDGE_DEPTH = 64;
  localparam int FD = VPB*CH_MAX;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  ack_mode_e mode; alu_op_e sys_op; data_t [LANES-1:0] sys_a, sys_b, sys_a_out, sys_acc;
  logic start, sweep, done; logic [$clog2(EDGE_DEPTH+1)-1:0] n_edges; chunk_t n_chunks; vidx_t sweep_dst;
  logic edge_rd_en; logic [$clog2(EDGE_DEPTH)-1:0] edge_rd_addr; edge_t edge_rd_data;
  logic feat_rd_en; logic [$clog2(FD)-1:0] feat_rd_addr; data_t [LANES-1:0] feat_rd_data;
  logic upd_valid, upd_ready; vidx_t upd_dst; chunk_t upd_chunk; data_t [LANES-1:0] upd_data;
  scatter_unit #(.P_SG(P_SG), .VPB(VPB), .CH_MAX(CH_MAX), .EDGE_DEPTH(EDGE_DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  edge_t emem [EDGE_DEPTH];
  data_t [LANES-1:0] fmem [FD];
  vidx_t  e_dst [$]; chunk_t e_c [$]; data_t [LANES-1:0] e_d [$];
  int n_bp = 0;
  always_ff @(posedge clk) begin
    if (edge_rd_en) edge_rd_data <= emem[edge_rd_addr];
    if (feat_rd_en) feat_rd_data <= fmem[feat_rd_addr];
  end
  always @(posedge clk) if (rst_n) begin
    if (upd_valid && !upd_ready) n_bp++;
    if (upd_valid && upd_ready) begin
      checks++;
      if (e_dst.size() == 0) begin failures++; $display("unexpected update"); end
      else begin
        vidx_t d; chunk_t cc; data_t [LANES-1:0] x;
        d = e_dst.pop_front(); cc = e_c.pop_front(); x = e_d.pop_front();
        if (upd_dst != d || upd_chunk != cc || upd_data != x) begin
          failures++; $display("update mismatch dst %0d/%0d chunk %0d/%0d", upd_dst, d, upd_chunk, cc);
        end
      end
    end
    upd_ready <= ($urandom() % 3) != 0;
  end
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int qm(int x, int y);
    longint p; p = longint'(x) * longint'(y); return int'(p >>> 16);
  endfunction

  task automatic run(bit sw, int ne, int nc, int sdst);
    @(negedge clk); sweep = sw; n_edges = 7'(ne); n_chunks = chunk_t'(nc); sweep_dst = vidx_t'(sdst); start = 1;
    @(negedge clk); start = 0;
    checks++; if (done) begin failures++; $display("done too early"); end
    wait (done);
    @(negedge clk);
    checks++; if (e_dst.size() != 0) begin failures++; $display("%0d updates missing", e_dst.size()); end
  endtask

  initial begin
    mode = MODE_SCATTER_GATHER; sys_op = ALU_NOP; sys_a = '0; sys_b = '0;
    start = 0; sweep = 0; n_edges = '0; n_chunks = chunk_t'(1); sweep_dst = '0; upd_ready = 1;
    for (int a = 0; a < FD; a++) for (int l = 0; l < LANES; l++) fmem[a][l] = data_t'(int'($urandom()) >>> 10);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      int ne, nc;
      ne = 1 + $urandom() % EDGE_DEPTH; nc = 1 + $urandom() % CH_MAX;
      for (int e = 0; e < ne; e++) begin
        emem[e].src = vidx_t'($urandom() % VPB); emem[e].dst = vidx_t'($urandom());
        emem[e].weight = data_t'($urandom() % 65536);
        for (int c = 0; c < nc; c++) begin
          data_t [LANES-1:0] x;
          for (int l = 0; l < LANES; l++) x[l] = qm(fmem[int'(emem[e].src)*CH_MAX + c][l], emem[e].weight);
          e_dst.push_back(emem[e].dst); e_c.push_back(chunk_t'(c)); e_d.push_back(x);
        end
      end
      run(0, ne, nc, 0);
    end
    // sweep (readout): every row of the bank, weight one, fixed destination
    for (int r = 0; r < 2; r++) begin
      int nc, sd; nc = 1 + $urandom() % CH_MAX; sd = $urandom() % 256;
      for (int v = 0; v < VPB; v++) for (int c = 0; c < nc; c++) begin
        e_dst.push_back(vidx_t'(sd)); e_c.push_back(chunk_t'(c)); e_d.push_back(fmem[v*CH_MAX + c]);
      end
      run(1, VPB, nc, sd);
    end
    // systolic mode: the ALUs follow the mesh operands instead
    @(negedge clk); mode = MODE_SYSTOLIC; sys_op = ALU_ADD;
    for (int l = 0; l < LANES; l++) begin sys_a[l] = data_t'($urandom()); sys_b[l] = data_t'($urandom()); end
    @(negedge clk);
    for (int l = 0; l < LANES; l++) begin checks++; if (sys_acc[l] != sys_a[l] + sys_b[l]) failures++; end
    checks++; if (n_bp == 0) begin failures++; $display("no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
