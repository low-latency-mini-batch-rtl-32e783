// gather_unit_tb: random updates are read-modify-written into a bank model
// (1-cycle read) with SUM, MAX and MIN. The bench holds an update back while
// its address is in the unit's busy list, as the RAW unit does, and checks
// the final bank contents against a reference aggregation; idle must be high
// once the pipeline drains. Also checks the systolic-mode ALU passthrough.
module gather_unit_tb;
  import gnn_pkg::*;
  localparam int P_SG = 2, LANES = 2*P_SG, AW = 4, D = 1 << AW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  ack_mode_e mode; agg_op_e agg; alu_op_e sys_op; data_t [LANES-1:0] sys_a, sys_b, sys_a_out, sys_acc;
  logic in_valid, in_ready; logic [AW-1:0] in_addr; data_t [LANES-1:0] in_data;
  logic [1:0] busy_valid; logic [1:0][AW-1:0] busy_addr;
  logic rd_en, wr_en; logic [AW-1:0] rd_addr, wr_addr; data_t [LANES-1:0] rd_data, wr_data; logic idle;
  gather_unit #(.P_SG(P_SG), .AW(AW)) dut (.*);
  int checks = 0, failures = 0, n_hold = 0;
  data_t [LANES-1:0] mem [D], ref_m [D];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    mode = MODE_SCATTER_GATHER; agg = AGG_SUM; sys_op = ALU_NOP; sys_a = '0; sys_b = '0;
    in_valid = 0; in_addr = '0; in_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      agg = agg_op_e'(r % 3);
      for (int a = 0; a < D; a++) for (int l = 0; l < LANES; l++) begin
        mem[a][l] = agg_identity(agg); ref_m[a][l] = agg_identity(agg);
      end
      for (int i = 0; i < 500; i++) begin
        logic [AW-1:0] ad; data_t [LANES-1:0] x;
        ad = AW'($urandom() % 5);       // few addresses: many hazards
        for (int l = 0; l < LANES; l++) x[l] = data_t'(int'($urandom()) >>> 12);
        @(negedge clk);
        in_valid = 0;
        #1;
        while ((busy_valid[0] && busy_addr[0] == ad) || (busy_valid[1] && busy_addr[1] == ad)) begin
          n_hold++; @(negedge clk); #1;
        end
        in_valid = ($urandom() % 4) != 0; in_addr = ad; in_data = x;
        if (in_valid) for (int l = 0; l < LANES; l++)
          case (agg)
            AGG_SUM: ref_m[ad][l] = ref_m[ad][l] + x[l];
            AGG_MAX: ref_m[ad][l] = (x[l] > ref_m[ad][l]) ? x[l] : ref_m[ad][l];
            default: ref_m[ad][l] = (x[l] < ref_m[ad][l]) ? x[l] : ref_m[ad][l];
          endcase
      end
      @(negedge clk); in_valid = 0;
      repeat (3) @(negedge clk);
      checks++; if (!idle) begin failures++; $display("not idle"); end
      for (int a = 0; a < D; a++) begin
        checks++; if (mem[a] != ref_m[a]) begin failures++; $display("agg %0d addr %0d mismatch", agg, a); end
      end
    end
    @(negedge clk); mode = MODE_SYSTOLIC; sys_op = ALU_MAX;
    for (int l = 0; l < LANES; l++) begin sys_a[l] = data_t'($urandom()); sys_b[l] = data_t'($urandom()); end
    @(negedge clk);
    for (int l = 0; l < LANES; l++) begin
      checks++; if (sys_acc[l] != ((sys_a[l] > sys_b[l]) ? sys_a[l] : sys_b[l])) failures++;
    end
    checks++; if (n_hold == 0) begin failures++; $display("no hazard hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
