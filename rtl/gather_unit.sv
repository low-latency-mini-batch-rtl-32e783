// gather_unit: one Gather Unit of the ACK, 2*P_SG ALUs, owning one bank of
// the destination Feature/Result Buffer (paper: each bank is connected to a
// Gather Unit; the vertices are split into equal, contiguous ranges).
//
// Scatter-gather mode: an update <addr, LANES features> accepted from the RAW
// unit is handled in a three-stage pipeline: stage 0 reads the old chunk at
// addr, stage 1 applies aggregate() lane by lane in the ALUs (ADD, MAX or MIN
// of update and old value), stage 2 writes the ALU result back. One update per
// cycle; the two addresses in stages 1 and 2 are reported to the RAW unit.
// The addr is the bank address (local row * CH_MAX + chunk), formed in the ACK.
// Systolic mode: the ALUs are rows 2g and 2g+1, columns P_SG..2*P_SG-1 of the
// ACK mesh; sys_* ports pass straight onto them.
module gather_unit
  import gnn_pkg::*;
#(
  parameter int P_SG  = 8,
  parameter int LANES = 2*P_SG,
  parameter int AW    = 11
) (
  input  logic clk,
  input  logic rst_n,
  input  ack_mode_e mode,
  input  agg_op_e   agg,
  input  alu_op_e            sys_op,
  input  data_t [LANES-1:0]  sys_a,
  input  data_t [LANES-1:0]  sys_b,
  output data_t [LANES-1:0]  sys_a_out,
  output data_t [LANES-1:0]  sys_acc,
  // update in (from RAW unit)
  input  logic   in_valid,
  input  logic [AW-1:0] in_addr,
  input  data_t [LANES-1:0] in_data,
  output logic   in_ready,
  // in-flight addresses for the RAW unit
  output logic [1:0]         busy_valid,
  output logic [1:0][AW-1:0] busy_addr,
  // destination bank ports (read latency 1)
  output logic   rd_en,
  output logic [AW-1:0] rd_addr,
  input  data_t [LANES-1:0] rd_data,
  output logic   wr_en,
  output logic [AW-1:0] wr_addr,
  output data_t [LANES-1:0] wr_data,
  output logic   idle
);
  logic s1_v, s2_v;
  logic [AW-1:0] s1_a, s2_a;
  data_t [LANES-1:0] s1_d, alu_acc;

  assign in_ready = 1'b1;
  assign rd_en    = in_valid && mode == MODE_SCATTER_GATHER;
  assign rd_addr  = in_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s2_v <= 1'b0; s1_a <= '0; s2_a <= '0; s1_d <= '0;
    end else begin
      s1_v <= rd_en;
      s1_a <= in_addr;
      s1_d <= in_data;
      s2_v <= s1_v;
      s2_a <= s1_a;
    end
  end

  for (genvar k = 0; k < LANES; k++) begin : g_alu
    alu_op_e op_k;
    data_t   a_k, b_k;
    assign op_k = (mode == MODE_SYSTOLIC) ? sys_op : agg_to_alu(agg);
    assign a_k  = (mode == MODE_SYSTOLIC) ? sys_a[k] : s1_d[k];
    assign b_k  = (mode == MODE_SYSTOLIC) ? sys_b[k] : rd_data[k];
    alu u_alu (.clk, .rst_n, .op(op_k), .a(a_k), .b(b_k), .a_out(sys_a_out[k]), .acc(alu_acc[k]));
  end
  assign sys_acc = alu_acc;

  assign wr_en   = s2_v;
  assign wr_addr = s2_a;
  assign wr_data = alu_acc;
  assign busy_valid = {s2_v, s1_v};
  assign busy_addr  = {s2_a, s1_a};
  assign idle = !s1_v && !s2_v;
endmodule
