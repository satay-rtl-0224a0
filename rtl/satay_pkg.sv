// satay_pkg: types and constants shared by the streaming YOLO accelerator.
// Activations are 16-bit signed fixed point (8 fractional bits assumed; the
// 16-bit width itself follows the W8A16 precision of the design), weights are
// 8-bit signed integers. All streams carry one activation word per beat in
// NHWC order (channel index fastest) under a ready/valid handshake: a word
// moves on a rising edge where both valid and ready are high.
package satay_pkg;
  localparam int unsigned DW   = 16;  // activation word length w_a
  localparam int unsigned WW   = 8;   // weight word length w_w
  localparam int unsigned FRAC = 8;   // fractional bits of activations (own choice)

  // Activation applied after a convolution in a CBS block.
  typedef enum logic [1:0] {
    ACT_NONE      = 2'd0,
    ACT_HARDSWISH = 2'd1,
    ACT_LEAKY     = 2'd2
  } act_e;

  localparam logic signed [DW-1:0] ACT_MAX = {1'b0, {(DW-1){1'b1}}};
  localparam logic signed [DW-1:0] ACT_MIN = {1'b1, {(DW-1){1'b0}}};

  // Saturate a wide signed value to an activation word.
  function automatic logic signed [DW-1:0] sat_act(input logic signed [63:0] v);
    if (v > 64'(signed'(ACT_MAX))) return ACT_MAX;
    if (v < 64'(signed'(ACT_MIN))) return ACT_MIN;
    return v[DW-1:0];
  endfunction
endpackage
