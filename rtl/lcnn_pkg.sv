// lcnn_pkg: number formats and sizes shared by the logarithmic CNN kernel.
//
// Every weight and activation is normalised to [-1, 1]. Weights use a 4-bit
// logarithmic code: one sign bit and a 3-bit exponent magnitude e, meaning
// (-1)^sign * 2^-e, so the codes cover +-2^0 .. +-2^-7 (there is no zero).
// Activations are 8-bit two's complement with 7 fraction bits (Q1.7), biases
// 16-bit with 15 fraction bits (Q1.15). These widths follow the paper. The
// accumulator width, its fraction bits, the scale-exponent range and the
// layer configuration record are choices of this design.
package lcnn_pkg;

  // Sizes given by the paper.
  parameter int unsigned LANES  = 128;  // processing elements
  parameter int unsigned W_BITS = 4;    // log weight: sign + exponent
  parameter int unsigned A_BITS = 8;    // activation
  parameter int unsigned B_BITS = 16;   // bias, double the activation width

  // Derived formats.
  parameter int unsigned E_BITS = W_BITS - 1;            // exponent field
  parameter int unsigned E_MAX  = (1 << E_BITS) - 1;     // B in the paper: 7
  parameter int unsigned A_FRAC = A_BITS - 1;            // 7

  // Design choices: a 32-bit accumulator with 15 fraction bits holds any sum
  // of up to 65535 products plus a bias without overflow.
  parameter int unsigned ACC_W    = 32;
  parameter int unsigned ACC_FRAC = 15;
  // Scale exponent i of f = 2^i, signed, -16 .. +15.
  parameter int unsigned SCALE_W  = 5;
  // The scaled value is kept exact: 2^(SCALE_W-1) extra fraction bits for
  // right shifts and 2^(SCALE_W-1) extra integer bits for left shifts.
  parameter int unsigned SC_W     = ACC_W + (1 << SCALE_W);
  parameter int unsigned SC_FRAC  = ACC_FRAC + (1 << (SCALE_W - 1));

  typedef logic signed [A_BITS-1:0] act_t;
  typedef logic signed [B_BITS-1:0] bias_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  typedef struct packed {
    logic              sign;  // 1: negative weight
    logic [E_BITS-1:0] exp;   // magnitude is 2^-exp
  } logw_t;

  // Per-layer parameters of the unified kernel.
  typedef struct packed {
    logic                      relu_en;    // g() = ReLU, else identity
    logic signed [SCALE_W-1:0] scale_exp;  // f = 2^scale_exp
  } layer_cfg_t;

endpackage
