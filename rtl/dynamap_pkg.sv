// dynamap_pkg: types and constants shared by the overlay.
//
// The overlay runs three GEMM-based convolution algorithms (im2col, kn2row,
// Winograd F(2x2,3x3)) on one systolic array that can switch between three
// dataflows per layer (non-stationary NS, weight-stationary WS and
// input-stationary IS). Data are 8-bit signed fixed point as in the evaluated
// design; the 32-bit accumulator width is this design's choice.
package dynamap_pkg;

  localparam int unsigned DATA_W = 8;   // INT8 operands
  localparam int unsigned ACC_W  = 32;  // accumulator / partial-sum width

  // Winograd hyper-parameters F(m x m, r x r) used by the Linear Transform
  // modules: m = 2, r = 3, tile edge m + r - 1 = 4.
  localparam int unsigned WINO_M = 2;
  localparam int unsigned WINO_R = 3;
  localparam int unsigned WINO_T = WINO_M + WINO_R - 1;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Convolution algorithm selected for a layer.
  typedef enum logic [1:0] {
    ALG_IM2COL = 2'd0,
    ALG_KN2ROW = 2'd1,
    ALG_WINO   = 2'd2
  } algo_e;

  // Systolic-array dataflow selected for a layer.
  typedef enum logic [1:0] {
    DF_NS = 2'd0,   // non-stationary: both operands move, result stays
    DF_WS = 2'd1,   // weight-stationary
    DF_IS = 2'd2    // input-stationary (mirror of WS)
  } dataflow_e;

  // PE operating mode: the PE only distinguishes "both operands move" from
  // "one operand is held in the ping-pong registers".
  typedef enum logic {
    PE_MOVE       = 1'b0,
    PE_STATIONARY = 1'b1
  } pe_mode_e;

  // Operand travelling horizontally through a row of PEs, with its tags.
  typedef struct packed {
    logic  valid;
    logic  first;   // first term of a dot product (NS): clear accumulator
    logic  last;    // last term of a dot product (NS): emit result
    logic  bank;    // which ping-pong stationary register to use (WS/IS)
    data_t data;
  } hop_t;

  // Result / partial sum travelling down a column of PEs.
  typedef struct packed {
    logic valid;
    acc_t data;
  } res_t;

  // Configuration of one Layout Transformation Unit job (Fig. 5 / Table 1).
  typedef struct packed {
    logic [31:0] b_start;
    logic [31:0] d_start;
    logic [31:0] step_b;
    logic [31:0] step_d;
    logic [31:0] n_outer;   // windows / tiles visited by state 1
    logic [31:0] n_row;     // elements per row, counted in state 2
    logic [31:0] n_rows;    // rows per window, counted in state 3
    logic [31:0] inc_b2;
    logic [31:0] inc_d2;
    logic [31:0] inc_b3;
    logic [31:0] inc_d3;
  } ltu_cfg_t;

  // One GEMM Z(a x c) = X(a x b) * W(b x c) on the array.
  typedef struct packed {
    dataflow_e   df;
    logic [15:0] a;
    logic [15:0] b;
    logic [15:0] c;
    logic [15:0] x_base;   // first input-buffer tile of X
    logic [15:0] w_base;   // first kernel-buffer tile of W
  } gemm_cfg_t;

  // Operations of the top-level command port (one runs at a time).
  typedef enum logic [2:0] {
    OP_GEMM     = 3'd0,   // GEMM on the array, results to output buffer or P&A
    OP_PA_DRAIN = 3'd1,   // copy the Pad-and-Accumulate buffer to the output buffer
    OP_WINO_OUT = 3'd2,   // Winograd output transform, output buffer to output buffer
    OP_POOL     = 3'd3,   // max pooling, output buffer to output buffer
    OP_STORE    = 3'd4    // DLT store: output buffer to external memory
  } op_e;

  // Load-port write kinds.
  typedef enum logic [1:0] {
    LD_X    = 2'd0,   // raw INT8 word into the input buffer
    LD_W    = 2'd1,   // raw INT8 word into the kernel buffer
    LD_WINX = 2'd2,   // 4x4 input tile through the input transform
    LD_WINW = 2'd3    // 3x3 kernel through the kernel transform
  } ld_kind_e;

  typedef struct packed {
    op_e         op;
    gemm_cfg_t   gemm;
    logic        to_pa;      // GEMM: results go to Pad-and-Accumulate
    logic        dst_grp;    // output-buffer bank group written
    logic        src_grp;    // output-buffer bank group read
    logic [15:0] dst_base;
    logic [15:0] src_base;
    logic [15:0] n;          // PA drain words / Winograd tiles / pool input vectors
    logic [15:0] stride;     // Winograd: distance between the 16 transform components
    logic [15:0] pa_h;
    logic [15:0] pa_w;
    logic [7:0]  pa_k1n;
    logic [7:0]  pa_k2n;
    logic [7:0]  pa_k1;
    logic [7:0]  pa_k2;
    logic        pa_init;
    logic [7:0]  pool_k;
    logic [7:0]  pool_s;
    logic [15:0] pool_w;
    ltu_cfg_t    ltu;
    logic [4:0]  shift;      // requantisation shift of the store
  } cmd_t;

  // Event counters exported by the top level.
  typedef struct packed {
    logic [31:0] ns_passes;      // NS passes issued
    logic [31:0] ws_latches;     // WS ping-pong register switches
    logic [31:0] df_switches;    // GEMMs whose dataflow differs from the previous one
    logic [31:0] acc_rounds;     // partial-sum accumulation rounds completed
    logic [31:0] pa_dropped;     // P&A pixels dropped at the map border
    logic [31:0] wino_tiles;     // Winograd output tiles transformed
    logic [31:0] bursts;         // external-memory write bursts
    logic [31:0] congest;        // NS result-chain congestion cycles
    logic [31:0] lt_writes;      // words written by the input/kernel transforms
  } stats_t;

endpackage
