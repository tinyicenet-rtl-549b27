// mult_array -- one "multiplier array" of the convolution compute stage:
// N parallel signed 8x8-bit multipliers, N = Kh*Kw = 9 for a 3x3 kernel,
// i.e. one product per tap of the window of a single input channel.
//
// Purely combinational; the parent registers the reduced sum.  The 3x3
// grid of multipliers per array follows the compute-stage drawing of the
// streaming convolution; the operand widths (int8 x int8 -> int16) follow
// the 8-bit quantised model.
module mult_array
  import tinyicenet_pkg::*;
#(
  parameter int N = 9
) (
  input  act_t  a [N],   // window activations of one input channel
  input  wgt_t  w [N],   // matching kernel weights
  output prod_t p [N]    // products
);
  always_comb begin
    for (int k = 0; k < N; k++) p[k] = prod_t'(a[k] * w[k]);
  end
endmodule
