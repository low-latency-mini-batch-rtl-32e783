// edge_buffer: the triple-buffered Edge Buffer of a PE.
//
// NBUF = 3 physical buffers follow the Feature/Result Buffer's rotation (paper:
// the Edge Buffer is also triple buffered), so the edges of the next target
// vertex are loaded while the current one runs. Each buffer has P_SG banks;
// bank u feeds scatter unit u and holds the edges whose source vertex lies in
// feature bank u (this design's partitioning), as edge_t <src,dst,weight>.
// One read port per bank for the selected buffer (rd_sel), read latency one
// cycle; one load write port from QDMA (ld_sel, ld_bank, ld_addr).
module edge_buffer
  import gnn_pkg::*;
#(
  parameter int NBUF       = 3,
  parameter int P_SG       = 8,
  parameter int EDGE_DEPTH = 8192,
  parameter int EAW        = $clog2(EDGE_DEPTH)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [1:0]               rd_sel,
  input  logic [P_SG-1:0]          rd_en,
  input  logic [P_SG-1:0][EAW-1:0] rd_addr,
  output edge_t [P_SG-1:0]         rd_data,
  input  logic [1:0]               ld_sel,
  input  logic                     ld_en,
  input  logic [$clog2(P_SG)-1:0]  ld_bank,
  input  logic [EAW-1:0]           ld_addr,
  input  edge_t                    ld_data
);
  localparam int EWID = $bits(edge_t);
  logic [1:0] rd_sel_q;
  logic [NBUF-1:0][P_SG-1:0][EWID-1:0] rdata;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rd_sel_q <= '0;
    else        rd_sel_q <= rd_sel;

  for (genvar p = 0; p < NBUF; p++) begin : g_buf
    for (genvar b = 0; b < P_SG; b++) begin : g_bank
      logic we;
      assign we = ld_en && (ld_sel == 2'(p)) && (ld_bank == b);
      sram_1r1w #(.WIDTH(EWID), .DEPTH(EDGE_DEPTH), .AW(EAW)) u_ram (
        .clk, .wr_en(we), .wr_addr(ld_addr), .wr_data(ld_data),
        .rd_en(rd_en[b] && rd_sel == 2'(p)), .rd_addr(rd_addr[b]), .rd_data(rdata[p][b])
      );
    end
  end

  for (genvar b = 0; b < P_SG; b++) begin : g_out
    assign rd_data[b] = edge_t'(rdata[rd_sel_q][b]);
  end

  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
                                   ld_en |-> (ld_sel != rd_sel || !(|rd_en)));
endmodule
