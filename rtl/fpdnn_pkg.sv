// fpdnn_pkg: types and constants shared by the field-programmable DNN fabric.
//
// Numbers: every datapath value is a signed fixed-point number of DATA_W bits
// with FRAC_W fraction bits (Q16.16 by default). The accelerator this RTL
// follows is specified for 64-bit floating point workers; fixed point is this
// design's own choice, made so that every arithmetic unit is a plain integer
// multiplier/adder. fx_mul() multiplies two such numbers and truncates.
//
// Frames: data moved between layers and between tensor and pixel fields is
// "tagged": a data word travels with an information part (who produced it,
// who it is for) and a control part (valid, training phase, pruning flag).
// The three-part frame layout data | information | control follows the
// accelerator's frame definition; the field widths and the exact fields are
// this design's choice.
package fpdnn_pkg;

  localparam int unsigned DATA_W = 32;   // fixed-point word width
  localparam int unsigned FRAC_W = 16;   // fraction bits
  localparam int unsigned ID_W   = 16;   // width of a node / pixel identity

  typedef logic signed [DATA_W-1:0] fx_t;

  localparam fx_t FX_ONE = fx_t'(1) <<< FRAC_W;

  // Training phase of the network ("SFE cycle state"): Forward,
  // Backpropagation, Update of weights.
  typedef enum logic [1:0] {
    SFE_IDLE = 2'd0,
    SFE_F    = 2'd1,
    SFE_B    = 2'd2,
    SFE_U    = 2'd3
  } sfe_state_e;

  // Programmable non-linearity of a pixel element / node.
  typedef enum logic [1:0] {
    ACT_LINEAR = 2'd0,
    ACT_RELU   = 2'd1
  } act_e;

  // Operation of a tensor element: multiply-accumulate (convolution,
  // fully connected) or maximum over the masked window (max-pool).
  typedef enum logic {
    TOP_MAC = 1'b0,
    TOP_MAX = 1'b1
  } tensor_op_e;

  typedef struct packed {
    logic [ID_W-1:0] src;   // identity of the producer (node / pixel)
    logic [ID_W-1:0] dst;   // identity of the consumer, where addressed
  } info_t;

  typedef struct packed {
    logic       valid;
    sfe_state_e state;
    logic       pruned;     // producer has been pruned; data is zero
  } ctrl_t;

  typedef struct packed {
    fx_t   data;
    info_t info;
    ctrl_t ctrl;
  } frame_t;

  localparam frame_t FRAME_IDLE = '0;

  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*DATA_W-1:0] p;
    p = (2*DATA_W)'(a) * (2*DATA_W)'(b);
    return fx_t'(p >>> FRAC_W);
  endfunction

  function automatic fx_t fx_abs(fx_t a);
    return (a < 0) ? -a : a;
  endfunction

  function automatic fx_t act_apply(act_e f, fx_t z);
    return (f == ACT_RELU && z < 0) ? '0 : z;
  endfunction

  // Derivative of the non-linearity, applied to a back-propagated sum.
  function automatic fx_t act_grad(act_e f, fx_t z, fx_t acc);
    return (f == ACT_RELU && z <= 0) ? '0 : acc;
  endfunction

endpackage
