// raw_unit_tb: random in-flight address sets; an update must pass exactly
// when its address matches none of the valid in-flight addresses, and stall
// otherwise; data and address pass unchanged.
module raw_unit_tb;
  import gnn_pkg::*;
  localparam int LANES = 4, AW = 4;
  logic in_valid, in_ready, out_valid, out_ready, stall;
  logic [AW-1:0] in_addr, out_addr;
  data_t [LANES-1:0] in_data, out_data;
  logic [1:0] busy_valid; logic [1:0][AW-1:0] busy_addr;
  raw_unit #(.LANES(LANES), .AW(AW), .INFLIGHT(2)) dut (.*);
  int checks = 0, failures = 0, n_stall = 0;
  initial begin
    for (int i = 0; i < 2000; i++) begin
      logic hz;
      in_valid = 1'($urandom()); in_addr = AW'($urandom()); out_ready = ($urandom() % 4) != 0;
      busy_valid = 2'($urandom()); busy_addr[0] = AW'($urandom() % 6); busy_addr[1] = AW'($urandom() % 6);
      for (int l = 0; l < LANES; l++) in_data[l] = data_t'($urandom());
      in_addr = AW'($urandom() % 6);
      #1;
      hz = (busy_valid[0] && busy_addr[0] == in_addr) || (busy_valid[1] && busy_addr[1] == in_addr);
      checks++; if (out_valid != (in_valid && !hz)) begin failures++; $display("out_valid wrong"); end
      checks++; if (in_ready != (out_ready && !hz)) begin failures++; $display("in_ready wrong"); end
      checks++; if (stall != (in_valid && hz)) failures++;
      checks++; if (out_addr != in_addr || out_data != in_data) failures++;
      n_stall += int'(stall);
    end
    checks++; if (n_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
