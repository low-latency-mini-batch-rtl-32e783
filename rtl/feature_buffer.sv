// feature_buffer: the triple-buffered Feature/Result Buffer of a PE.
//
// NBUF = 3 physical buffers (paper: one for the current layer's features, one
// for the next layer's, one being prefetched with the next target vertex's
// input features). Each buffer has P_SG banks, one per scatter/gather unit;
// bank b holds vertex rows b*VPB .. b*VPB+VPB-1, CH_MAX words per row, one
// word = P_SYS elements (512 bits at P_SYS = 16). Bank address = local row *
// CH_MAX + chunk.
// The PE controller assigns roles by buffer index each cycle: src (read ports,
// the kernel's input), dst (read and write ports, the kernel's output) and ld
// (the QDMA load port). A physical buffer serves the role whose select names
// it; src and dst must differ, and ld may not name the dst buffer (asserted).
// Read latency 1 cycle. The role multiplexing is this design's; the paper gives
// the three buffers, their uses and the banking.
module feature_buffer
  import gnn_pkg::*;
#(
  parameter int NBUF   = 3,
  parameter int P_SYS  = 16,
  parameter int P_SG   = P_SYS/2,
  parameter int VPB    = 32,
  parameter int CH_MAX = 38,
  parameter int BAW    = $clog2(VPB*CH_MAX)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [1:0] src_sel,
  input  logic [P_SG-1:0]             src_rd_en,
  input  logic [P_SG-1:0][BAW-1:0]    src_rd_addr,
  output data_t [P_SG-1:0][P_SYS-1:0] src_rd_data,
  input  logic [1:0] dst_sel,
  input  logic [P_SG-1:0]             dst_rd_en,
  input  logic [P_SG-1:0][BAW-1:0]    dst_rd_addr,
  output data_t [P_SG-1:0][P_SYS-1:0] dst_rd_data,
  input  logic [P_SG-1:0]             dst_wr_en,
  input  logic [P_SG-1:0][BAW-1:0]    dst_wr_addr,
  input  data_t [P_SG-1:0][P_SYS-1:0] dst_wr_data,
  input  logic [1:0] ld_sel,
  input  logic       ld_en,
  input  logic [$clog2(P_SG)-1:0] ld_bank,
  input  logic [BAW-1:0]          ld_addr,
  input  data_t [P_SYS-1:0]       ld_data
);
  localparam int WW = P_SYS*DATA_W;
  logic [1:0] src_sel_q, dst_sel_q;
  logic [NBUF-1:0][P_SG-1:0][WW-1:0] rdata;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin src_sel_q <= '0; dst_sel_q <= '0; end
    else begin src_sel_q <= src_sel; dst_sel_q <= dst_sel; end

  for (genvar p = 0; p < NBUF; p++) begin : g_buf
    for (genvar b = 0; b < P_SG; b++) begin : g_bank
      logic is_src, is_dst, is_ld;
      logic re, we;
      logic [BAW-1:0] ra, wa;
      logic [WW-1:0]  wd;
      assign is_src = (src_sel == 2'(p));
      assign is_dst = (dst_sel == 2'(p));
      assign is_ld  = (ld_sel == 2'(p)) && ld_en && (ld_bank == b);
      assign re = (is_src && src_rd_en[b]) || (is_dst && dst_rd_en[b]);
      assign ra = is_src ? src_rd_addr[b] : dst_rd_addr[b];
      assign we = (is_dst && dst_wr_en[b]) || is_ld;
      assign wa = is_dst ? dst_wr_addr[b] : ld_addr;
      assign wd = is_dst ? WW'(dst_wr_data[b]) : WW'(ld_data);
      sram_1r1w #(.WIDTH(WW), .DEPTH(VPB*CH_MAX), .AW(BAW)) u_ram (
        .clk, .wr_en(we), .wr_addr(wa), .wr_data(wd),
        .rd_en(re), .rd_addr(ra), .rd_data(rdata[p][b])
      );
    end
  end

  for (genvar b = 0; b < P_SG; b++) begin : g_out
    assign src_rd_data[b] = rdata[src_sel_q][b];
    assign dst_rd_data[b] = rdata[dst_sel_q][b];
  end

  a_roles: assert property (@(posedge clk) disable iff (!rst_n)
                            (|dst_wr_en || |dst_rd_en) |-> (src_sel != dst_sel));
  a_ld:    assert property (@(posedge clk) disable iff (!rst_n)
                            ld_en |-> (ld_sel != dst_sel || !(|dst_wr_en)));
endmodule
