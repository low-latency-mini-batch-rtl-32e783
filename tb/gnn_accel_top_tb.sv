// gnn_accel_top_tb: end-to-end run of the accelerator at reduced size
// (N_PE = 2 PEs with 4x4 ACKs, 16-vertex subgraphs) on a batch of 6 target
// vertices with a one-layer GCN-style model FA(sum) -> FT(ReLU) -> readout(max).
// The host side is modelled here: it hands each target to a PE whose prefetch
// buffer is free (so inputs are loaded while PEs compute), delivers the weights
// late to PE 0, and throttles the embedding stream. Every embedding is checked
// against gnn_ref_pkg, and each mechanism of the design must occur at least
// once: ACK mode switches, RAW stalls, routing conflicts, weight waits,
// load/compute overlap and two PEs competing for the output stream.
module gnn_accel_top_tb;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int N_PE = 2;
  localparam int P_SYS = 4, P_SG = 2, MAX_V = 16, VPB = 8, CH_MAX = 4;
  localparam int EDGE_DEPTH = 64, FOUT_CH = 2, KT_DEPTH = 8;
  localparam int N_USE = N_PE;
  localparam int NT = 6;              // targets in the batch
  localparam int NV [NT] = '{12, 16, 9, 16, 5, 13};
  localparam int FIN = 8, FOUT = 8, MAXCYC = 400000;
`include "gnn_top_bench_body.svh"

  gnn_accel_top #(.N_PE(N_PE), .P_SYS(P_SYS), .P_SG(P_SG), .MAX_V(MAX_V), .VPB(VPB),
                  .CH_MAX(CH_MAX), .EDGE_DEPTH(EDGE_DEPTH), .FOUT_CH(FOUT_CH),
                  .KT_DEPTH(KT_DEPTH)) dut (.*);
endmodule
