// feature_buffer_tb: three buffers x P_SG banks. Each round the roles
// (source, destination, prefetch) rotate; random prefetch loads, destination
// read-modify-writes and source reads run together and every read is checked
// against a shadow memory (read returns the value before a same-cycle write).
module feature_buffer_tb;
  import gnn_pkg::*;
  localparam int P_SYS = 4, P_SG = 2, VPB = 4, CH_MAX = 4, D = VPB*CH_MAX, BAW = $clog2(D);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] src_sel, dst_sel, ld_sel;
  logic [P_SG-1:0] src_rd_en, dst_rd_en, dst_wr_en;
  logic [P_SG-1:0][BAW-1:0] src_rd_addr, dst_rd_addr, dst_wr_addr;
  data_t [P_SG-1:0][P_SYS-1:0] src_rd_data, dst_rd_data, dst_wr_data;
  logic ld_en; logic [$clog2(P_SG)-1:0] ld_bank; logic [BAW-1:0] ld_addr; data_t [P_SYS-1:0] ld_data;
  feature_buffer #(.P_SYS(P_SYS), .P_SG(P_SG), .VPB(VPB), .CH_MAX(CH_MAX)) dut (.*);

  int checks = 0, failures = 0;
  logic [P_SYS*DATA_W-1:0] shadow [3][P_SG][D];
  bit known [3][P_SG][D];
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [P_SYS*DATA_W-1:0] exp_s [P_SG], exp_d [P_SG];
    bit chk_s [P_SG], chk_d [P_SG];
    foreach (known[p, b, a]) known[p][b][a] = 0;
    src_sel = 0; dst_sel = 1; ld_sel = 2; ld_en = 0; src_rd_en = '0; dst_rd_en = '0; dst_wr_en = '0;
    src_rd_addr = '0; dst_rd_addr = '0; dst_wr_addr = '0; dst_wr_data = '0; ld_bank = '0; ld_addr = '0; ld_data = '0;
    foreach (chk_s[b]) begin chk_s[b] = 0; chk_d[b] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 12; r++) begin
      for (int cyc = 0; cyc < 400; cyc++) begin
        @(negedge clk);
        // rotate roles like the PE does at a target boundary; the data of
        // reads issued before the rotation must still come from the old roles
        if (cyc % 50 == 0) begin
          src_sel = 2'((r + cyc/50) % 3); dst_sel = 2'((r + cyc/50 + 1) % 3); ld_sel = 2'((r + cyc/50 + 2) % 3);
        end
        #1;
        for (int b = 0; b < P_SG; b++) begin
          if (chk_s[b]) begin checks++; if (src_rd_data[b] != exp_s[b]) begin failures++; $display("src mismatch bank %0d", b); end end
          if (chk_d[b]) begin checks++; if (dst_rd_data[b] != exp_d[b]) begin failures++; $display("dst mismatch bank %0d", b); end end
        end
        ld_en = 1'($urandom()); ld_bank = 1'($urandom()); ld_addr = BAW'($urandom() % D);
        foreach (ld_data[l]) ld_data[l] = data_t'($urandom());
        for (int b = 0; b < P_SG; b++) begin
          src_rd_en[b] = 1'($urandom()); src_rd_addr[b] = BAW'($urandom() % D);
          dst_rd_en[b] = 1'($urandom()); dst_rd_addr[b] = BAW'($urandom() % D);
          dst_wr_en[b] = 1'($urandom()); dst_wr_addr[b] = BAW'($urandom() % D);
          foreach (dst_wr_data[b][l]) dst_wr_data[b][l] = data_t'($urandom());
          chk_s[b] = src_rd_en[b] && known[src_sel][b][src_rd_addr[b]];
          exp_s[b] = shadow[src_sel][b][src_rd_addr[b]];
          chk_d[b] = dst_rd_en[b] && known[dst_sel][b][dst_rd_addr[b]];
          exp_d[b] = shadow[dst_sel][b][dst_rd_addr[b]];
        end
        for (int b = 0; b < P_SG; b++) if (dst_wr_en[b]) begin
          shadow[dst_sel][b][dst_wr_addr[b]] = dst_wr_data[b]; known[dst_sel][b][dst_wr_addr[b]] = 1;
        end
        if (ld_en) begin shadow[ld_sel][ld_bank][ld_addr] = ld_data; known[ld_sel][ld_bank][ld_addr] = 1; end
      end
    end
    @(negedge clk);
    checks++; if (checks < 1000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
