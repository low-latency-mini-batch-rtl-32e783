// weight_buffer: the double-buffered Weight Buffer of a PE.
//
// Two halves (paper: one holds the weight matrix of the current layer, the
// other receives the next layer's). Word (k*FOUT_CH + jc) of a half holds
// W[k][jc*P_SYS .. jc*P_SYS+P_SYS-1], so the ACK gets P_SYS weights per cycle.
// The DDR side writes a half and then marks it full (wr_commit); the PE reads
// it and frees it when the kernel that uses it ends (release). full[h] tells
// both sides who owns half h: writing a full half is an error (asserted).
// Read latency one cycle. The full/release handshake is this design's choice.
module weight_buffer
  import gnn_pkg::*;
#(
  parameter int P_SYS   = 16,
  parameter int F_MAX   = 608,   // input rows k
  parameter int FOUT_CH = 16,    // output chunks (256 outputs / 16)
  parameter int DEPTH   = F_MAX*FOUT_CH,
  parameter int WAW     = $clog2(DEPTH)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic              wr_en,
  input  logic              wr_half,
  input  logic [WAW-1:0]    wr_addr,
  input  data_t [P_SYS-1:0] wr_data,
  input  logic              wr_commit,
  input  logic              commit_half,
  input  logic              rd_en,
  input  logic              rd_half,
  input  logic [WAW-1:0]    rd_addr,
  output data_t [P_SYS-1:0] rd_data,
  input  logic              release_en,
  input  logic              release_half,
  output logic [1:0]        full
);
  localparam int WW = P_SYS*DATA_W;
  logic rd_half_q;
  logic [1:0][WW-1:0] rdata;

  for (genvar h = 0; h < 2; h++) begin : g_half
    sram_1r1w #(.WIDTH(WW), .DEPTH(DEPTH), .AW(WAW)) u_ram (
      .clk, .wr_en(wr_en && wr_half == h), .wr_addr, .wr_data(WW'(wr_data)),
      .rd_en(rd_en && rd_half == h), .rd_addr, .rd_data(rdata[h])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; rd_half_q <= 1'b0;
    end else begin
      if (rd_en) rd_half_q <= rd_half;
      for (int h = 0; h < 2; h++) begin
        if (release_en && release_half == 1'(h)) full[h] <= 1'b0;
        if (wr_commit && commit_half == 1'(h))  full[h] <= 1'b1;
      end
    end
  end
  assign rd_data = rdata[rd_half_q];

  a_no_write_full: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full[wr_half]);
endmodule
