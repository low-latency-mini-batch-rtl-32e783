// edge_buffer_tb: edges are prefetched into one buffer while the scatter
// side reads another; roles rotate each round and all reads are checked
// against a shadow copy.
module edge_buffer_tb;
  import gnn_pkg::*;
  localparam int P_SG = 4, EDGE_DEPTH = 32, EAW = $clog2(EDGE_DEPTH);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] rd_sel, ld_sel; logic [P_SG-1:0] rd_en; logic [P_SG-1:0][EAW-1:0] rd_addr;
  edge_t [P_SG-1:0] rd_data; logic ld_en; logic [$clog2(P_SG)-1:0] ld_bank; logic [EAW-1:0] ld_addr; edge_t ld_data;
  edge_buffer #(.P_SG(P_SG), .EDGE_DEPTH(EDGE_DEPTH)) dut (.*);
  int checks = 0, failures = 0;
  edge_t shadow [3][P_SG][EDGE_DEPTH];
  bit known [3][P_SG][EDGE_DEPTH];
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    edge_t exp [P_SG]; bit chk [P_SG];
    foreach (known[p, b, a]) known[p][b][a] = 0;
    foreach (chk[b]) chk[b] = 0;
    rd_sel = 0; ld_sel = 1; rd_en = '0; rd_addr = '0; ld_en = 0; ld_bank = '0; ld_addr = '0; ld_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 9; r++) begin
      for (int cyc = 0; cyc < 300; cyc++) begin
        @(negedge clk);
        // rotate roles; data of reads issued before must come from the old buffer
        if (cyc % 50 == 0) begin rd_sel = 2'((r + cyc/50) % 3); ld_sel = 2'((r + cyc/50 + 2) % 3); end
        #1;
        for (int b = 0; b < P_SG; b++) if (chk[b]) begin
          checks++; if (rd_data[b] != exp[b]) begin failures++; $display("edge mismatch bank %0d", b); end
        end
        ld_en = 1'($urandom()); ld_bank = 2'($urandom()); ld_addr = EAW'($urandom());
        ld_data.src = vidx_t'($urandom()); ld_data.dst = vidx_t'($urandom()); ld_data.weight = data_t'($urandom());
        for (int b = 0; b < P_SG; b++) begin
          rd_en[b] = 1'($urandom()); rd_addr[b] = EAW'($urandom());
          chk[b] = rd_en[b] && known[rd_sel][b][rd_addr[b]]; exp[b] = shadow[rd_sel][b][rd_addr[b]];
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
