// tinyicenet_pkg -- types, widths and parameter tables shared by the
// TinyIceNet streaming accelerator.
//
// Number formats: activations are signed 8-bit integers (the SAR input is
// the [-1,1] normalised backscatter scaled to [-127,127]); weights are
// signed 8-bit integers, matching the 8-bit quantisation-aware-trained
// model.  Every conv3x3 is followed by a folded batch normalisation and a
// ReLU, expressed as y = clamp((acc*scale + bias) >>> shift, 0, 127).
//
// Weight contents.  The trained coefficients are not published, so the
// ROMs of every layer are filled from a fixed integer hash of
// (layer, output channel, input channel, ky, kx).  Weights fall in
// [-7, 7], BN scales in [16, 31] and the shift grows with the fan-in so
// that activations keep a useful spread through all eight layers.  The
// same functions are used by the testbenches' reference models; swapping
// in trained values only means replacing conv_weight/bn_scale/bn_bias.
package tinyicenet_pkg;

  localparam int DW  = 8;    // activation / weight width
  localparam int PW  = 16;   // product width
  localparam int AW  = 32;   // accumulator width
  localparam int LW  = 24;   // class logit width (pointwise conv output)
  localparam int NCLS = 7;   // SOD output classes (Fig. 1: 64 -> 7)
  localparam int CLSW = 3;   // width of a class index

  typedef logic signed [DW-1:0] act_t;
  typedef logic signed [DW-1:0] wgt_t;
  typedef logic signed [PW-1:0] prod_t;
  typedef logic signed [AW-1:0] acc_t;
  typedef logic signed [LW-1:0] logit_t;

  // 32-bit integer mixing function (xorshift-multiply)
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x ^ (x >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic logic [31:0] key(input int layer, input int a, input int b, input int c);
    return mix32(32'(layer) * 32'h9E3779B1 ^ mix32(32'(a) * 32'h85EBCA77 ^
                 mix32(32'(b) * 32'hC2B2AE3D ^ 32'(c))));
  endfunction

  // 3x3 weight of layer 1..8, or pointwise weight of layer 9 (ky = kx = 0)
  function automatic wgt_t conv_weight(input int layer, input int co, input int ci,
                                       input int ky, input int kx);
    logic [31:0] h;
    h = key(layer, co, ci, ky * 3 + kx);
    return wgt_t'(int'(h[15:8]) % 15 - 7);
  endfunction

  // right shift of the folded BN for a layer with fan-in cin*9
  function automatic int bn_shift(input int cin);
    return 6 + $clog2(cin * 9) / 2;
  endfunction

  function automatic logic [7:0] bn_scale(input int layer, input int co);
    logic [31:0] h;
    h = key(layer, co, 1000, 1);
    return 8'(16 + h[3:0]);
  endfunction

  function automatic logic signed [23:0] bn_bias(input int layer, input int co, input int cin);
    logic [31:0] h;
    int span;
    h    = key(layer, co, 1000, 2);
    span = 1 << (bn_shift(cin) + 5);
    return 24'(int'(h[23:0]) % span - span / 2);
  endfunction

  // bias of the pointwise classifier (layer 9)
  function automatic logit_t pw_bias(input int co);
    logic [31:0] h;
    h = key(9, co, 1000, 3);
    return logit_t'(int'(h[7:0]) - 128);
  endfunction

  // folded BN + ReLU + requantisation, used by the RTL and the references
  function automatic act_t bn_relu(input acc_t acc, input logic [7:0] scale,
                                   input logic signed [23:0] bias, input int shift);
    logic signed [55:0] t;
    t = 56'(acc) * $signed({48'd0, scale}) + 56'(bias);
    t = t >>> shift;
    if (t < 0)        return act_t'(0);
    else if (t > 127) return act_t'(127);
    else              return act_t'(t);
  endfunction

endpackage
