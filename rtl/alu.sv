// alu: one Arithmetic Logical Unit of the Adaptive Computation Kernel.
//
// The same ALU serves both execution modes of the ACK; the op input, set by the
// unit that owns the ALU, selects what it does in a cycle:
//   LOADW  w <= b, acc <= b       (systolic: weights shift down a column)
//   MAC    acc <= b + a*w, a_q <= a (systolic, weight stationary: a moves east,
//                                  the partial sum acc moves south)
//   MUL    acc <= a*b             (scatter unit: feature times edge weight)
//   ADD/MAX/MIN acc <= f(a,b)     (gather unit: aggregate() of update and old value)
//   PASS   acc <= a,  NOP holds.
// The paper lists multiplication, addition, multiply-accumulate, min and max as
// the ALU's operations; the weight latch and the east/south outputs are this
// design's way of realising the systolic connections of the paper's figures.
// Arithmetic is Q16.16 fixed point (gnn_pkg::qmul), a departure from the
// paper's Float32. Timing: every result is registered, one cycle latency.
module alu
  import gnn_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  alu_op_e op,
  input  data_t   a,       // west input / first operand
  input  data_t   b,       // north input / second operand
  output data_t   a_out,   // a delayed one cycle (to east neighbour)
  output data_t   acc      // result register (to south neighbour / unit output)
);
  data_t w_q, a_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      w_q <= '0;
      a_q <= '0;
    end else begin
      case (op)
        ALU_LOADW: begin w_q <= b; acc <= b; end
        ALU_MAC:   begin acc <= b + qmul(a, w_q); a_q <= a; end
        ALU_MUL:   acc <= qmul(a, b);
        ALU_ADD:   acc <= a + b;
        ALU_MAX:   acc <= (a > b) ? a : b;
        ALU_MIN:   acc <= (a < b) ? a : b;
        ALU_PASS:  acc <= a;
        default:   ;
      endcase
    end
  end

  assign a_out = a_q;
endmodule
