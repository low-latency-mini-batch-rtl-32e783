// gnn_accel_top_full_tb: the accelerator at its default (paper) size -- 8 PEs,
// 16x16 ACKs, 256-vertex subgraph buffers -- taken through one complete
// operation: a batch of three target vertices (40, 24 and 33 vertex subgraphs, on PEs
// 0 and 1,
// 32-element features) on a one-layer FA -> FT(ReLU) -> readout(max) model,
// checked element by element against gnn_ref_pkg. Same bench body as
// gnn_accel_top_tb; the accelerator keeps all its default parameters.
module gnn_accel_top_full_tb;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int N_PE = DEF_N_PE;
  localparam int P_SYS = DEF_P_SYS, P_SG = P_SYS/2, MAX_V = 256, VPB = MAX_V/P_SG, CH_MAX = 38;
  localparam int EDGE_DEPTH = 8192, FOUT_CH = 16, KT_DEPTH = 64;
  localparam int N_USE = 2;
  localparam int NT = 3;
  localparam int NV [NT] = '{40, 24, 33};
  localparam int FIN = 32, FOUT = 32, MAXCYC = 200000;
`include "gnn_top_bench_body.svh"

  gnn_accel_top dut (.*);
endmodule
