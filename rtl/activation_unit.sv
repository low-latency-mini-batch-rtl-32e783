// activation_unit: element-wise activation applied to P_SYS results per cycle
// as feature transformation writes its last partial sums back (paper: the
// Activation Unit executes the activation of FT, e.g. ReLU, LeakyReLU).
// ReLU: max(x,0). LeakyReLU: x for x >= 0, else NEG_SLOPE*x (Q16.16, default
// 0.2, the slope GAT uses; the paper does not give one). ACT_NONE passes x.
// One register stage: out_* follow in_* by one cycle. The Softmax of the
// attention kernel (built by the paper on an exp() primitive) is not part of
// this unit.
module activation_unit
  import gnn_pkg::*;
#(
  parameter int    LANES     = 16,
  parameter int    TAG_W     = 8,
  parameter data_t NEG_SLOPE = data_t'(13107)   // 0.2 in Q16.16
) (
  input  logic clk,
  input  logic rst_n,
  input  act_e act,
  input  logic              in_valid,
  input  logic [TAG_W-1:0]  in_tag,
  input  data_t [LANES-1:0] in_data,
  output logic              out_valid,
  output logic [TAG_W-1:0]  out_tag,
  output data_t [LANES-1:0] out_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_tag <= '0; out_data <= '0;
    end else begin
      out_valid <= in_valid;
      out_tag   <= in_tag;
      for (int k = 0; k < LANES; k++) begin
        case (act)
          ACT_RELU:  out_data[k] <= (in_data[k] < 0) ? '0 : in_data[k];
          ACT_LRELU: out_data[k] <= (in_data[k] < 0) ? qmul(in_data[k], NEG_SLOPE) : in_data[k];
          default:   out_data[k] <= in_data[k];
        endcase
      end
    end
  end
endmodule
