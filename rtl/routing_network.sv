// routing_network: all-to-all butterfly network from the P_SG scatter units
// to the P_SG gather units (paper: butterfly network, P_SG input and P_SG
// output ports, 32*p_sys-bit data).
//
// log2(P_SG) stages of 2x2 switches; stage s sets bit (S-1-s) of a packet's
// line number to the same bit of its destination port, so after the last
// stage every packet sits on its destination. The network is combinational
// and lossless with valid/ready flow control: when two packets want the same
// switch output one of them is held at its input (in_ready low) and retried
// next cycle. Which one wins alternates every cycle (a toggling priority bit)
// so that neither input starves. An input is ready only if its packet got
// through every stage and the destination accepted it. The internal switch
// and arbitration design is this design's own; the paper defers it to its
// reference. conflict is high in a cycle where some switch had to hold a packet.
module routing_network #(
  parameter int PORTS = 8,
  parameter int W     = 512
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [PORTS-1:0]                       in_valid,
  input  logic [PORTS-1:0][$clog2(PORTS)-1:0]    in_port,   // destination port
  input  logic [PORTS-1:0][W-1:0]                in_data,
  output logic [PORTS-1:0]                       in_ready,
  output logic [PORTS-1:0]                       out_valid,
  output logic [PORTS-1:0][W-1:0]                out_data,
  input  logic [PORTS-1:0]                       out_ready,
  output logic                                   conflict
);
  localparam int S  = $clog2(PORTS);
  localparam int IW = (S > 0) ? S : 1;

  logic prio;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) prio <= 1'b0;
    else        prio <= ~prio;

  logic [S:0][PORTS-1:0]         v;
  logic [S:0][PORTS-1:0][IW-1:0] src;
  logic [PORTS-1:0][IW-1:0]      dst_of_src;

  always_comb begin
    conflict = 1'b0;
    for (int i = 0; i < PORTS; i++) begin
      v[0][i]   = in_valid[i];
      src[0][i] = IW'(i);
      dst_of_src[i] = IW'(in_port[i]);
    end
    for (int s = 0; s < S; s++) begin
      int b;
      b = S - 1 - s;
      v[s+1] = '0;
      src[s+1] = '0;
      for (int l0 = 0; l0 < PORTS; l0++) begin
        if (((l0 >> b) & 1) == 0) begin
          int l1;
          logic w0, w1;     // wanted output side (bit b of destination)
          l1 = l0 | (1 << b);
          w0 = dst_of_src[src[s][l0]][b];
          w1 = dst_of_src[src[s][l1]][b];
          if (v[s][l0] && v[s][l1] && (w0 == w1)) begin
            conflict = 1'b1;
            // one packet proceeds, the other is held
            if (prio == 1'b0) begin
              v[s+1][w0 ? l1 : l0]   = 1'b1;
              src[s+1][w0 ? l1 : l0] = src[s][l0];
            end else begin
              v[s+1][w1 ? l1 : l0]   = 1'b1;
              src[s+1][w1 ? l1 : l0] = src[s][l1];
            end
          end else begin
            if (v[s][l0]) begin
              v[s+1][w0 ? l1 : l0]   = 1'b1;
              src[s+1][w0 ? l1 : l0] = src[s][l0];
            end
            if (v[s][l1]) begin
              v[s+1][w1 ? l1 : l0]   = 1'b1;
              src[s+1][w1 ? l1 : l0] = src[s][l1];
            end
          end
        end
      end
    end
  end

  always_comb begin
    for (int o = 0; o < PORTS; o++) begin
      out_valid[o] = v[S][o];
      out_data[o]  = in_data[src[S][o]];
    end
  end

  always_comb begin
    in_ready = '0;
    for (int o = 0; o < PORTS; o++)
      if (v[S][o] && out_ready[o]) in_ready[src[S][o]] = 1'b1;
  end

  // a packet that leaves on port o must be addressed to o
  for (genvar o = 0; o < PORTS; o++) begin : g_chk
    a_route: assert property (@(posedge clk) disable iff (!rst_n)
                              out_valid[o] |-> (in_port[src[S][o]] == o));
  end
endmodule
