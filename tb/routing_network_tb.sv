// routing_network_tb: 8-port butterfly with random traffic and random output
// back-pressure. Each input sends a numbered sequence of packets to random
// ports; every packet must come out exactly once, on its own port, in order
// per (input, output) pair, and conflicts must occur.
module routing_network_tb;
  localparam int PORTS = 8, W = 24, PKTS = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [PORTS-1:0] in_valid, in_ready, out_valid, out_ready, conflict_v;
  logic [PORTS-1:0][2:0] in_port;
  logic [PORTS-1:0][W-1:0] in_data, out_data;
  logic conflict;
  routing_network #(.PORTS(PORTS), .W(W)) dut (.*);
  int checks = 0, failures = 0, n_conf = 0, recv = 0;
  int sent [PORTS];
  int next_seq [PORTS][PORTS];
  logic [2:0] dest [PORTS][PKTS];
  initial begin repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always_comb
    for (int i = 0; i < PORTS; i++) begin
      in_valid[i] = rst_n && sent[i] < PKTS;
      in_port[i]  = dest[i][(sent[i] < PKTS) ? sent[i] : 0];
      // payload: source, sequence number
      in_data[i]  = W'({8'(i), 16'(sent[i])});
    end

  always @(posedge clk) if (rst_n) begin
    n_conf += int'(conflict);
    for (int o = 0; o < PORTS; o++) if (out_valid[o] && out_ready[o]) begin
      int s, q;
      s = int'(out_data[o][23:16]); q = int'(out_data[o][15:0]);
      checks++;
      if (int'(dest[s][q]) != o) begin failures++; $display("pkt %0d/%0d on port %0d", s, q, o); end
      checks++;
      if (next_seq[s][o] > q) begin failures++; $display("order/dup %0d/%0d", s, q); end
      next_seq[s][o] = q + 1;
      recv++;
    end
    for (int i = 0; i < PORTS; i++) if (in_valid[i] && in_ready[i]) sent[i]++;
    out_ready <= PORTS'($urandom()) | PORTS'($urandom());
  end

  initial begin
    foreach (sent[i]) sent[i] = 0;
    foreach (next_seq[i, o]) next_seq[i][o] = 0;
    foreach (dest[i, p]) dest[i][p] = 3'($urandom());
    out_ready = '1;
    repeat (2) @(negedge clk); rst_n = 1;
    wait (recv == PORTS*PKTS);
    repeat (5) @(negedge clk);
    checks++; if (n_conf == 0) begin failures++; $display("no conflicts"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
