// gnn_pkg: types, constants and design-time formulas shared by the mini-batch
// GNN inference accelerator.
//
// The accelerator computes one target vertex per Processing Element (PE) on a
// small vertex-induced subgraph. Every PE holds one Adaptive Computation
// Kernel (ACK), a p_sys x p_sys array of ALUs that runs either as a systolic
// array (dense kernels) or as p_sg = p_sys/2 scatter and p_sg gather units
// (sparse aggregation). Numbers are 32-bit; the paper uses Float32, this RTL
// uses signed Q16.16 fixed point instead (a choice of this design, see README).
//
// The design-space-exploration formulas of the paper (p_sys as the largest
// power of two with p_sys^2 <= N_DSP/N_ALU, and N_pe = floor(N_DSP/N_ALU/p_sys^2))
// are given as constant functions so the defaults follow from the device
// numbers: 3072 DSPs per SLR of an Alveo U250 (device total 12288 over 4 SLRs,
// vendor data) and 5 DSPs per ALU (paper) give p_sys = 16 and 2 PEs per SLR.
package gnn_pkg;

  localparam int DATA_W = 32;   // one feature / weight element
  localparam int FRAC_W = 16;   // Q16.16

  typedef logic signed [DATA_W-1:0] data_t;

  // ALU operations. The ACK sets one op per cycle for all ALUs of a unit.
  typedef enum logic [2:0] {
    ALU_NOP   = 3'd0,  // hold
    ALU_LOADW = 3'd1,  // latch stationary weight from north input, pass it on
    ALU_MAC   = 3'd2,  // acc <= b + a*w, a passed east
    ALU_MUL   = 3'd3,  // acc <= a*b
    ALU_ADD   = 3'd4,  // acc <= a+b
    ALU_MAX   = 3'd5,  // acc <= max(a,b)
    ALU_MIN   = 3'd6,  // acc <= min(a,b)
    ALU_PASS  = 3'd7   // acc <= a
  } alu_op_e;

  // ACK execution modes; switching costs one cycle (one control register).
  typedef enum logic [0:0] {
    MODE_SYSTOLIC = 1'b0,
    MODE_SCATTER_GATHER = 1'b1
  } ack_mode_e;

  // aggregate() operators of the gather units
  typedef enum logic [1:0] {
    AGG_SUM = 2'd0,
    AGG_MAX = 2'd1,
    AGG_MIN = 2'd2
  } agg_op_e;

  typedef enum logic [1:0] {
    ACT_NONE  = 2'd0,
    ACT_RELU  = 2'd1,
    ACT_LRELU = 2'd2   // LeakyReLU
  } act_e;

  // Kernel kinds a PE executes, one after another.
  typedef enum logic [1:0] {
    K_FA      = 2'd0,  // feature aggregation, scatter-gather mode
    K_FT      = 2'd1,  // feature transformation, systolic mode
    K_READOUT = 2'd2   // readout over all vertices into row 0, scatter-gather mode
  } kernel_kind_e;

  // Vertex and chunk index widths. A subgraph holds at most 2**VIDX_W vertices;
  // a feature vector is handled in chunks of p_sys elements (one 512-bit word
  // at p_sys = 16), at most 2**CH_W chunks.
  localparam int VIDX_W = 8;
  localparam int CH_W   = 6;
  typedef logic [VIDX_W-1:0] vidx_t;
  typedef logic [CH_W-1:0]   chunk_t;

  // Edge as stored in the Edge Buffer: <src, dst, weight> (paper Sec. 4.2).
  typedef struct packed {
    vidx_t src;
    vidx_t dst;
    data_t weight;
  } edge_t;

  // One kernel of the task list the host allocates for a model (paper: "for
  // inferring a target vertex using a L-layer model with 2 kernels, the host
  // program allocates 2L kernels"). src_b/dst_b pick the PE's working
  // buffers: 0 = A (holds the target's input features at start), 1 = B.
  typedef struct packed {
    kernel_kind_e kind;
    logic         src_b;
    logic         dst_b;
    agg_op_e      agg;      // FA / readout aggregate()
    act_e         act;      // FT activation
    logic         whalf;    // FT: Weight Buffer half to use
    logic         wrelease; // FT: free that half when the kernel ends
    chunk_t       in_ch;    // input feature chunks (FA/readout: feature chunks)
    chunk_t       out_ch;   // FT output chunks
    logic         last;     // last kernel of the model
  } kernel_t;

  localparam data_t Q_ONE   = data_t'(1 << FRAC_W);
  localparam data_t DATA_MAX = {1'b0, {(DATA_W-1){1'b1}}};
  localparam data_t DATA_MIN = {1'b1, {(DATA_W-1){1'b0}}};

  // Identity element of an aggregate operator (value a cleared row starts at).
  function automatic data_t agg_identity(agg_op_e op);
    case (op)
      AGG_MAX: return DATA_MIN;
      AGG_MIN: return DATA_MAX;
      default: return '0;
    endcase
  endfunction

  function automatic alu_op_e agg_to_alu(agg_op_e op);
    case (op)
      AGG_MAX: return ALU_MAX;
      AGG_MIN: return ALU_MIN;
      default: return ALU_ADD;
    endcase
  endfunction

  // Q16.16 product, truncated toward minus infinity, wrapping on overflow.
  function automatic data_t qmul(data_t a, data_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return data_t'(p >>> FRAC_W);
  endfunction

  // ---- design space exploration (paper Sec. 4.5), evaluated at elaboration ----
  function automatic int dse_p_sys(int n_dsp, int n_alu);
    int alus, p;
    alus = n_dsp / n_alu;
    p = 1;
    while ((2*p)*(2*p) <= alus) p = 2*p;
    return p;
  endfunction

  function automatic int dse_n_pe(int n_dsp, int n_alu);
    int p;
    p = dse_p_sys(n_dsp, n_alu);
    return (n_dsp / n_alu) / (p*p);
  endfunction

  localparam int U250_SLRS        = 4;
  localparam int U250_DSP_PER_SLR = 3072;
  localparam int DSP_PER_ALU      = 5;
  localparam int DEF_P_SYS  = dse_p_sys(U250_DSP_PER_SLR, DSP_PER_ALU);               // 16
  localparam int DEF_N_PE   = U250_SLRS * dse_n_pe(U250_DSP_PER_SLR, DSP_PER_ALU);    // 8

endpackage
