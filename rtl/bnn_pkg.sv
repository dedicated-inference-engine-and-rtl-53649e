// bnn_pkg: types and constants shared by the binary-weight inference engine.
//
// The engine computes o = sum_i a_i * w_i + (beta + gamma) with J-bit unsigned
// activations a_i and 1-bit weights. The weight bit is either w' in {0,1}
// (mode m = 1, AND) or the code of w in {-1,+1} (mode m = 0, XNOR, with
// w' = (w + 1) / 2). J = 8 follows the paper; the remaining widths and the
// layer descriptor below are choices of this implementation.
package bnn_pkg;

  // Activation bit width J (paper: "J is set to 8 in this work").
  parameter int unsigned J_BITS    = 8;
  // Width of one MAC accumulator ("Buffer"): J + 16 bits covers I <= 65793.
  parameter int unsigned ACC_BITS  = 24;
  // Width of a stored beta+gamma word and of the adder array outputs.
  parameter int unsigned BIAS_BITS = 32;
  // Number of bitwise MAC units / adders / quantizer lanes working in parallel.
  parameter int unsigned N_LANES   = 16;

  // Operation mode m of the logical operation units (Table 1).
  typedef enum logic {
    MODE_XNOR = 1'b0,   // m = 0: weights are +-1, product by XNOR
    MODE_AND  = 1'b1    // m = 1: weights are {0,1}, product by AND
  } bw_mode_e;

  // Kind of layer run by the control unit.
  typedef enum logic [1:0] {
    OP_MAC     = 2'd0,  // binary-weight matrix product + beta+gamma
    OP_ELTWISE = 2'd1,  // element-wise add of two feature maps
    OP_DWCONV  = 2'd2   // depthwise binary-weight convolution + beta+gamma
  } layer_op_e;

  // Layer descriptor written by the host before 'start'.
  // Feature memory rows: a row of C channels occupies ceil(C / LANES) words,
  // channel c in word c / LANES, lane c % LANES.
  typedef struct packed {
    layer_op_e   op;        // OP_MAC, OP_ELTWISE or OP_DWCONV
    bw_mode_e    mode;      // m for OP_MAC and OP_DWCONV
    logic [15:0] n_in;      // I: activations (OP_MAC) or taps (OP_DWCONV) per output
    logic [15:0] n_rows;    // P: input rows (pixels) to process, >= 1
    logic [7:0]  n_groups;  // G: output channel groups of LANES channels, >= 1
    logic [15:0] in_base;   // feature memory word address of input row 0
    logic [15:0] in2_base;  // second operand map for OP_ELTWISE
    logic [15:0] out_base;  // word address of output row 0
    logic [15:0] w_base;    // weight bank address of group 0, input 0
    logic [15:0] b_base;    // beta+gamma bank address of group 0
    logic [4:0]  shift;     // quantizer right shift
    logic [3:0]  pool;      // rows per max-pooling window (1 = no pooling)
  } layer_cfg_t;

endpackage
