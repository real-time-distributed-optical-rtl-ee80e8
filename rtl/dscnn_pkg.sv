// dscnn_pkg: types, number formats and the hard-wired weight set shared by the
// DSCNN-3 accelerator.
//
// Number formats (this design's choice; the network only says "shift-add
// quantization"):
//  * Activations are signed 8-bit integers (act_t). After each layer's ReLU they
//    are in 0..127.
//  * Every weight is a power of two or zero, held as a 4-bit code (wcode_t):
//    bit 3 is the sign, bits 2:0 an exponent e. The weight is (-1)^s * 2^-e for
//    e = 0..6; e = 7 encodes zero. A product is therefore a shift, no multiplier.
//  * Products and sums are kept exactly with EMAX = 6 extra fraction bits
//    (act * 2^(EMAX-e)); a layer output is the sum shifted right by EMAX (floor),
//    i.e. back in activation scale, then ReLU and saturation.
//  * Biases are signed 8-bit integers in activation scale (batch-norm scale and
//    shift are assumed folded into the point-wise weights and biases).
//
// Weights: the accelerator stores no weights in RAM; they are constants in the
// logic. The trained values are not reproduced here, so wcode() and bias() fill
// the network from a fixed integer hash. To load a trained model, replace the
// bodies of wcode() and bias() by tables of the trained codes indexed the same
// way:
//   layer 1..3, kind KIND_DW  : idx = c*9 + k    (k = 3*(dr+1) + (dc+1))
//   layer 1..3, kind KIND_DWB : idx = c
//   layer 1..3, kind KIND_PW  : idx = o*CIN + i
//   layer 1..3, kind KIND_PWB : idx = o
//   layer 4 (FC), KIND_PW     : idx = k*FLAT + f, f = c*NPOS + p (channel-major
//                                flatten), KIND_PWB : idx = k
package dscnn_pkg;

  localparam int ACT_W    = 8;
  localparam int WCODE_W  = 4;
  localparam int EMAX     = 6;
  localparam int PROD_W   = ACT_W + EMAX + 1;
  localparam int ACC_W    = 24;
  localparam int FC_ACC_W = 28;
  localparam int NCLASS   = 3;

  typedef logic signed [ACT_W-1:0]    act_t;
  typedef logic        [WCODE_W-1:0]  wcode_t;
  typedef logic signed [PROD_W-1:0]   prod_t;
  typedef logic signed [ACC_W-1:0]    acc_t;
  typedef logic signed [FC_ACC_W-1:0] fc_acc_t;

  // Class order as listed in the data set table.
  typedef enum logic [1:0] {
    CLS_HAMMER    = 2'd0,
    CLS_AIR_PICK  = 2'd1,
    CLS_EXCAVATOR = 2'd2
  } class_e;

  typedef enum logic {
    POOL_MAX = 1'b0,
    POOL_AVG = 1'b1
  } pool_mode_e;

  localparam int KIND_DW  = 0;
  localparam int KIND_DWB = 1;
  localparam int KIND_PW  = 2;
  localparam int KIND_PWB = 3;

  localparam int WEIGHT_SEED = 32'h1F0D_5EED;

  // 32-bit integer hash (xor-shift-multiply).
  function automatic logic [31:0] hash32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7FEB_352D;
    h = h ^ (h >> 15);
    h = h * 32'h846C_A68B;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic logic [31:0] wkey(input int layer, input int kind, input int idx);
    return hash32(WEIGHT_SEED ^ hash32(32'(layer) * 32'd1_000_003 + 32'(kind) * 32'd7919 + 32'(idx)));
  endfunction

  // Weight code of one weight. Exponents are spread evenly over 0..7 (7 = zero
  // weight) for layers 1 and 2; the wide layers 3 and 4 use 1..7, so that their
  // sums stay in range.
  function automatic wcode_t wcode(input int layer, input int kind, input int idx);
    logic [8:0] h;
    logic [2:0] emin;
    h    = 9'(wkey(layer, kind, idx));
    emin = (layer >= 3) ? 3'd1 : 3'd0;
    return {h[8], emin + 3'(32'(h[7:0]) % (32'd8 - 32'(emin)))};
  endfunction

  // Bias in activation scale, -2..1 for the conv layers, -8..7 for the FC. Small
  // biases keep the placeholder network's deep features dependent on the input.
  function automatic act_t bias(input int layer, input int kind, input int idx);
    logic [5:0] h;
    h = 6'(wkey(layer, kind, idx) >> 10);
    if (layer == 4) return act_t'($signed(h[3:0]));
    return act_t'($signed(h[1:0]));
  endfunction

  // Saturate a wide signed sum to the activation range.
  function automatic act_t sat_act(input acc_t v);
    if (v > acc_t'(127))  return act_t'(127);
    if (v < acc_t'(-128)) return act_t'(-128);
    return act_t'(v);
  endfunction

endpackage
