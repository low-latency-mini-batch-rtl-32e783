// sync_fifo: small first-word-fall-through FIFO used as the output queue of a
// scatter unit. push/pop in the same cycle are allowed; push when full and pop
// when empty are errors (asserted). count gives the occupancy.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [WIDTH-1:0]         din,
  input  logic                     pop,
  output logic [WIDTH-1:0]         dout,
  output logic                     empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int CW = $clog2(DEPTH+1);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] rd_p, wr_p;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_p <= '0; wr_p <= '0; count <= '0;
    end else begin
      if (push) begin
        mem[wr_p] <= din;
        wr_p <= (wr_p == AW'(DEPTH-1)) ? '0 : wr_p + 1'b1;
      end
      if (pop) rd_p <= (rd_p == AW'(DEPTH-1)) ? '0 : rd_p + 1'b1;
      count <= count + CW'(push) - CW'(pop);
    end
  end

  assign empty = (count == 0);
  assign dout  = mem[rd_p];

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && !pop && count == CW'(DEPTH)));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
