// weight_buffer_tb: double buffering. The host fills one half and commits
// it (full=1) while the PE reads the other; release clears full. Checks the
// full flags, that reads return the committed contents of the selected half,
// and that a fill of one half does not disturb the other.
module weight_buffer_tb;
  import gnn_pkg::*;
  localparam int P_SYS = 4, F_MAX = 8, FOUT_CH = 2, DEPTH = F_MAX*FOUT_CH, WAW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, wr_half, wr_commit, commit_half, rd_en, rd_half, release_en, release_half;
  logic [WAW-1:0] wr_addr, rd_addr; data_t [P_SYS-1:0] wr_data, rd_data; logic [1:0] full;
  weight_buffer #(.P_SYS(P_SYS), .F_MAX(F_MAX), .FOUT_CH(FOUT_CH)) dut (.*);
  int checks = 0, failures = 0;
  data_t [P_SYS-1:0] shadow [2][DEPTH];
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic fill(int h);
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); wr_en = 1; wr_half = 1'(h); wr_addr = WAW'(a);
      foreach (wr_data[l]) wr_data[l] = data_t'($urandom());
      shadow[h][a] = wr_data;
      // the PE keeps reading the other half meanwhile
      rd_en = 1; rd_half = 1'(1 - h); rd_addr = WAW'($urandom() % DEPTH);
      @(negedge clk); wr_en = 0;
      checks++; if (rd_data != shadow[1-h][rd_addr]) begin failures++; $display("read during fill"); end
      rd_en = 0;
    end
    @(negedge clk); wr_commit = 1; commit_half = 1'(h);
    @(negedge clk); wr_commit = 0;
    checks++; if (!full[h]) begin failures++; $display("commit did not set full"); end
  endtask

  initial begin
    wr_en = 0; wr_half = 0; wr_commit = 0; commit_half = 0; rd_en = 0; rd_half = 0; release_en = 0; release_half = 0;
    wr_addr = '0; rd_addr = '0; wr_data = '0;
    foreach (shadow[h, a]) shadow[h][a] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); checks++; if (full != 2'b00) failures++;
    // initialise both halves so reads of the other half are defined
    for (int h = 0; h < 2; h++) for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); wr_en = 1; wr_half = 1'(h); wr_addr = WAW'(a); wr_data = '0;
    end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < 10; r++) begin
      int h; h = r % 2;
      fill(h);
      for (int k = 0; k < 3*DEPTH; k++) begin
        @(negedge clk); rd_en = 1; rd_half = 1'(h); rd_addr = WAW'($urandom() % DEPTH);
        @(negedge clk); rd_en = 0;
        checks++; if (rd_data != shadow[h][rd_addr]) begin failures++; $display("read of committed half"); end
      end
      @(negedge clk); release_en = 1; release_half = 1'(h);
      @(negedge clk); release_en = 0;
      checks++; if (full[h]) begin failures++; $display("release did not clear full"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
