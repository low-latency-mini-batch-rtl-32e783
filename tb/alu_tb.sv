// alu_tb: drives every ALU operation with random Q16.16 operands and checks
// the registered result (one cycle later) against an integer model.
module alu_tb;
  import gnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  alu_op_e op; data_t a, b, a_out, acc;
  alu dut (.*);
  int checks = 0, failures = 0;

  function automatic int qm(int x, int y);
    longint p; p = longint'(x) * longint'(y); return int'(p >>> 16);
  endfunction

  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic step(alu_op_e o, int x, int y, int exp_acc, logic chk_a, int exp_a);
    @(negedge clk); op = o; a = x; b = y;
    @(negedge clk); op = ALU_NOP;
    checks++;
    if (int'(acc) != exp_acc) begin failures++; $display("op %s a=%0d b=%0d acc=%0d exp %0d", o.name(), x, y, acc, exp_acc); end
    if (chk_a) begin checks++; if (int'(a_out) != exp_a) begin failures++; $display("a_out %0d exp %0d", a_out, exp_a); end end
  endtask

  initial begin
    int x, y, w, acc_m;
    op = ALU_NOP; a = '0; b = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      x = int'($urandom()) >>> 8; y = int'($urandom()) >>> 8; w = int'($urandom()) >>> 12;
      step(ALU_MUL, x, y, qm(x, y), 0, 0);
      step(ALU_ADD, x, y, x + y, 0, 0);
      step(ALU_MAX, x, y, (x > y) ? x : y, 0, 0);
      step(ALU_MIN, x, y, (x < y) ? x : y, 0, 0);
      step(ALU_PASS, x, y, x, 0, 0);
      step(ALU_LOADW, x, w, w, 0, 0);          // weight latched, acc = b
      step(ALU_MAC, x, y, y + qm(x, w), 1, x); // uses the latched weight
      acc_m = int'(acc);
      step(ALU_NOP, y, x, acc_m, 1, x);        // holds
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
