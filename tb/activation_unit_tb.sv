// activation_unit_tb: random inputs through NONE, ReLU and LeakyReLU (slope
// 0.2 in Q16.16) with a one-cycle latency check of valid, tag and data.
module activation_unit_tb;
  import gnn_pkg::*;
  localparam int LANES = 8, TAG_W = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  act_e act; logic in_valid, out_valid; logic [TAG_W-1:0] in_tag, out_tag;
  data_t [LANES-1:0] in_data, out_data;
  activation_unit #(.LANES(LANES), .TAG_W(TAG_W)) dut (.*);
  int checks = 0, failures = 0;
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    act = ACT_NONE; in_valid = 0; in_tag = '0; in_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      int x [LANES];
      act_e a;
      a = act_e'($urandom() % 3);
      @(negedge clk);
      act = a; in_valid = 1'($urandom()); in_tag = TAG_W'(i);
      for (int l = 0; l < LANES; l++) begin x[l] = int'($urandom()) >>> 6; in_data[l] = x[l]; end
      @(negedge clk);
      checks++; if (out_valid != in_valid || out_tag != TAG_W'(i)) failures++;
      for (int l = 0; l < LANES; l++) begin
        int e;
        longint p;
        p = longint'(x[l]) * 13107;
        case (a)
          ACT_RELU:  e = (x[l] < 0) ? 0 : x[l];
          ACT_LRELU: e = (x[l] < 0) ? int'(p >>> 16) : x[l];
          default:   e = x[l];
        endcase
        checks++;
        if (int'(out_data[l]) != e) begin failures++; $display("act %0d x %0d got %0d exp %0d", a, x[l], out_data[l], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
