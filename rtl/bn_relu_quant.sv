// bn_relu_quant -- folded batch normalisation, ReLU and requantisation.
//
// Each 3x3 convolution of the network is followed by BN and ReLU.  At
// inference time BN is an affine map per output channel, folded here into
// an integer multiplier `scale`, an offset `bias` and a right shift:
//     y = clamp((acc * scale + bias) >>> shift, 0, 127)
// The lower clamp is the ReLU, the upper one saturates to int8.  The
// fixed-point form (8-bit scale, 24-bit bias, arithmetic shift) is this
// design's choice; the paper states only that BN and ReLU follow every
// convolution.  Combinational.
module bn_relu_quant
  import tinyicenet_pkg::*;
(
  input  acc_t               acc,
  input  logic [7:0]         scale,
  input  logic signed [23:0] bias,
  input  logic [4:0]         shift,
  output act_t               y
);
  logic signed [55:0] t, s;
  always_comb begin
    t = 56'(acc) * $signed({48'd0, scale}) + 56'(bias);
    s = t >>> shift;
    if (s < 0)        y = act_t'(0);
    else if (s > 127) y = act_t'(127);
    else              y = act_t'(s);
  end
endmodule
