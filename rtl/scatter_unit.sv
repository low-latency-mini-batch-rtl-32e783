// scatter_unit: one Scatter Unit of the ACK, 2*P_SG ALUs.
//
// Scatter-gather mode (paper Alg. 4): the unit walks the edges <src,dst,weight>
// of its Edge Buffer bank, and for every edge and every feature chunk reads the
// chunk of src's feature vector from its own Feature/Result Buffer bank,
// multiplies all LANES elements by the edge weight (ALU op MUL, a vector
// multiplier as in the paper) and queues the update <dst, chunk, features>
// for the routing network. In readout sweep mode the "edges" are generated:
// every local vertex row with weight 1.0 and dst = sweep_dst.
// Edges are given to the unit whose feature bank holds src, so every scatter
// unit reads only its own bank (this design's choice; the paper does not say
// how scatter units reach the features).
//
// Systolic mode: the ALUs are rows 2u and 2u+1, columns 0..P_SG-1 of the
// ACK's mesh; the unit only multiplexes sys_* ports onto them.
//
// Timing: edge and feature reads have one cycle latency; an update leaves the
// ALUs two cycles after its feature read and is queued in a FIFO_DEPTH FIFO.
// Reads are issued only when the FIFO has room for every update in flight, so
// back-pressure from the routing network (upd_ready low) loses nothing. With
// no back-pressure the unit issues one chunk per cycle, edges back to back.
// done is high whenever the unit is idle with nothing queued.
module scatter_unit
  import gnn_pkg::*;
#(
  parameter int P_SG       = 8,
  parameter int LANES      = 2*P_SG,
  parameter int VPB        = 32,      // vertex rows per bank
  parameter int CH_MAX     = 38,      // chunk slots per vertex row
  parameter int EDGE_DEPTH = 8192,
  parameter int FIFO_DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  ack_mode_e mode,
  // systolic-mode mesh ports, one per ALU (lane k = row k/P_SG, column k%P_SG)
  input  alu_op_e            sys_op,
  input  data_t [LANES-1:0]  sys_a,
  input  data_t [LANES-1:0]  sys_b,
  output data_t [LANES-1:0]  sys_a_out,
  output data_t [LANES-1:0]  sys_acc,
  // scatter-gather control
  input  logic   start,
  input  logic   sweep,
  input  logic [$clog2(EDGE_DEPTH+1)-1:0] n_edges,
  input  chunk_t n_chunks,           // chunks per vertex, >= 1
  input  vidx_t  sweep_dst,
  output logic   done,
  // Edge Buffer bank read port (1-cycle latency)
  output logic   edge_rd_en,
  output logic [$clog2(EDGE_DEPTH)-1:0] edge_rd_addr,
  input  edge_t  edge_rd_data,
  // Feature/Result Buffer bank read port (1-cycle latency)
  output logic   feat_rd_en,
  output logic [$clog2(VPB*CH_MAX)-1:0] feat_rd_addr,
  input  data_t [LANES-1:0] feat_rd_data,
  // update stream to the routing network
  output logic   upd_valid,
  output vidx_t  upd_dst,
  output chunk_t upd_chunk,
  output data_t [LANES-1:0] upd_data,
  input  logic   upd_ready
);
  localparam int EW = $clog2(EDGE_DEPTH+1);
  localparam int FAW = $clog2(VPB*CH_MAX);
  localparam int LVW = $clog2(VPB);
  localparam int UPD_W = VIDX_W + CH_W + LANES*DATA_W;

  // ---------------- edge walk ----------------
  logic          busy;
  logic [EW-1:0] e_next;      // next edge to fetch
  logic          pending;     // an edge fetch was issued last cycle
  vidx_t         fetch_idx;   // sweep mode: vertex row being read
  logic          cur_valid;
  edge_t         cur_edge, edge_in, edge_now;
  chunk_t        c;
  logic          have, credit_ok, issue, last_chunk, fetch_now;
  logic          t1_v, t2_v;
  vidx_t         t1_dst, t2_dst;
  chunk_t        t1_c, t2_c;
  data_t         t1_w;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count;
  logic          fifo_empty;

  always_comb begin
    if (sweep) begin
      edge_in.src    = vidx_t'(fetch_idx);
      edge_in.dst    = sweep_dst;
      edge_in.weight = Q_ONE;
    end else begin
      edge_in = edge_rd_data;
    end
  end

  assign edge_now   = pending ? edge_in : cur_edge;
  assign have       = pending || cur_valid;
  assign credit_ok  = (32'(fifo_count) + 32'(t1_v) + 32'(t2_v)) < FIFO_DEPTH;
  assign issue      = busy && have && credit_ok;
  assign last_chunk = (c == n_chunks - 1'b1);
  assign fetch_now  = busy && (e_next < n_edges) && (!have || (issue && last_chunk));

  assign edge_rd_en   = fetch_now && !sweep;
  assign edge_rd_addr = e_next[$clog2(EDGE_DEPTH)-1:0];
  assign feat_rd_en   = issue;
  assign feat_rd_addr = FAW'(32'(edge_now.src[LVW-1:0]) * CH_MAX + 32'(c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; e_next <= '0; pending <= 1'b0; fetch_idx <= '0;
      cur_valid <= 1'b0; cur_edge <= '0; c <= '0;
      t1_v <= 1'b0; t2_v <= 1'b0;
      t1_dst <= '0; t2_dst <= '0; t1_c <= '0; t2_c <= '0; t1_w <= '0;
    end else begin
      if (start) begin
        busy <= 1'b1; e_next <= '0; pending <= 1'b0; cur_valid <= 1'b0; c <= '0;
      end else if (busy) begin
        pending <= fetch_now;
        if (fetch_now) begin
          fetch_idx <= vidx_t'(e_next);
          e_next <= e_next + 1'b1;
        end
        if (issue) begin
          if (last_chunk) begin
            c <= '0;
            cur_valid <= 1'b0;
          end else begin
            c <= c + 1'b1;
            cur_edge <= edge_now;
            cur_valid <= 1'b1;
          end
        end else if (pending) begin
          cur_edge <= edge_in;
          cur_valid <= 1'b1;
        end
        if (e_next == n_edges && !have && !pending && !t1_v && !t2_v && fifo_empty)
          busy <= 1'b0;
      end
      // ALU pipeline tags
      t1_v <= issue;
      t1_dst <= edge_now.dst; t1_c <= c; t1_w <= edge_now.weight;
      t2_v <= t1_v; t2_dst <= t1_dst; t2_c <= t1_c;
    end
  end

  assign done = !busy && !start;

  // ---------------- ALUs ----------------
  data_t [LANES-1:0] alu_acc;
  for (genvar k = 0; k < LANES; k++) begin : g_alu
    alu_op_e op_k;
    data_t   a_k, b_k;
    assign op_k = (mode == MODE_SYSTOLIC) ? sys_op : ALU_MUL;
    assign a_k  = (mode == MODE_SYSTOLIC) ? sys_a[k] : feat_rd_data[k];
    assign b_k  = (mode == MODE_SYSTOLIC) ? sys_b[k] : t1_w;
    alu u_alu (.clk, .rst_n, .op(op_k), .a(a_k), .b(b_k), .a_out(sys_a_out[k]), .acc(alu_acc[k]));
  end
  assign sys_acc = alu_acc;

  // ---------------- output queue ----------------
  logic [UPD_W-1:0] fifo_dout;
  logic pop;
  assign pop = upd_valid && upd_ready;
  sync_fifo #(.WIDTH(UPD_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .push (t2_v && mode == MODE_SCATTER_GATHER),
    .din  ({t2_dst, t2_c, alu_acc}),
    .pop,
    .dout (fifo_dout),
    .empty(fifo_empty),
    .count(fifo_count)
  );
  assign upd_valid = !fifo_empty;
  assign {upd_dst, upd_chunk, upd_data} = fifo_dout;
endmodule
