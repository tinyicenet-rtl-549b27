// tinyicenet_top -- the TinyIceNet sea-ice stage-of-development accelerator.
//
// Input: a dual-polarisation SAR scene, H x W pixels x 2 channels (HH, HV)
// as signed 8-bit words, streamed in raster order with the two channels
// of a pixel on consecutive beats.  Output: the H x W map of SOD classes
// (0..6), one 3-bit class per beat in raster order.
//
// Dataflow (all stages run concurrently, joined by valid/ready streams):
//   input_block      DConv-3   2 -> 16 ch   H   x W    (layers 1, 2)
//   pool0            2x2 max                -> H/2
//   contract_block0  DConv-3  16 -> 32 ch   H/2 x W/2  (layers 3, 4)
//   pool1            2x2 max                -> H/4
//   contract_block1  DConv-3  32 -> 64 ch   H/4 x W/4  (layers 5, 6)
//   pool2            2x2 max                -> H/8
//   contract_block2  DConv-3  64 -> 64 ch   H/8 x W/8  (layers 7, 8)
//   upsample         x8 nearest neighbour   -> H x W, 64 ch
//   head             1x1 conv 64 -> 7 logits, then argmax -> class
// There are no skip connections, so nothing from the encoder is kept for
// the decoder.  Nine convolution layers in all, the last one pointwise.
//
// Unroll factors (the paper gives none): the full-resolution second layer
// uses the SIPO form (UF_IN 8, UF_OUT 2), the first layer has UF_IN 2,
// all other 3x3 layers are standard with UF_IN 16.  H and W must be
// multiples of 8.
module tinyicenet_top
  import tinyicenet_pkg::*;
#(
  parameter int H = 512,
  parameter int W = 512
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  act_t            in_data,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [CLSW-1:0] out_class
);
  // stream s[k]: k = 0 after input_block ... see the table above
  localparam int NS = 8;
  logic   s_valid [NS];
  logic   s_ready [NS];
  act_t   s_data  [NS];
  logic   l_valid, l_ready;
  logit_t l_data;

  dconv3 #(.CIN(2), .COUT(16), .H(H), .W(W), .UF_IN_A(2), .UF_OUT_A(1),
           .UF_IN_B(8), .UF_OUT_B(2), .LAYER_A(1)) input_block (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(s_valid[0]), .out_ready(s_ready[0]), .out_data(s_data[0]));

  maxpool2 #(.C(16), .W(W)) pool0 (
    .clk, .rst_n, .in_valid(s_valid[0]), .in_ready(s_ready[0]), .in_data(s_data[0]),
    .out_valid(s_valid[1]), .out_ready(s_ready[1]), .out_data(s_data[1]));

  dconv3 #(.CIN(16), .COUT(32), .H(H/2), .W(W/2), .UF_IN_A(16), .UF_OUT_A(1),
           .UF_IN_B(16), .UF_OUT_B(1), .LAYER_A(3)) contract_block0 (
    .clk, .rst_n, .in_valid(s_valid[1]), .in_ready(s_ready[1]), .in_data(s_data[1]),
    .out_valid(s_valid[2]), .out_ready(s_ready[2]), .out_data(s_data[2]));

  maxpool2 #(.C(32), .W(W/2)) pool1 (
    .clk, .rst_n, .in_valid(s_valid[2]), .in_ready(s_ready[2]), .in_data(s_data[2]),
    .out_valid(s_valid[3]), .out_ready(s_ready[3]), .out_data(s_data[3]));

  dconv3 #(.CIN(32), .COUT(64), .H(H/4), .W(W/4), .UF_IN_A(16), .UF_OUT_A(1),
           .UF_IN_B(16), .UF_OUT_B(1), .LAYER_A(5)) contract_block1 (
    .clk, .rst_n, .in_valid(s_valid[3]), .in_ready(s_ready[3]), .in_data(s_data[3]),
    .out_valid(s_valid[4]), .out_ready(s_ready[4]), .out_data(s_data[4]));

  maxpool2 #(.C(64), .W(W/4)) pool2 (
    .clk, .rst_n, .in_valid(s_valid[4]), .in_ready(s_ready[4]), .in_data(s_data[4]),
    .out_valid(s_valid[5]), .out_ready(s_ready[5]), .out_data(s_data[5]));

  dconv3 #(.CIN(64), .COUT(64), .H(H/8), .W(W/8), .UF_IN_A(16), .UF_OUT_A(1),
           .UF_IN_B(16), .UF_OUT_B(1), .LAYER_A(7)) contract_block2 (
    .clk, .rst_n, .in_valid(s_valid[5]), .in_ready(s_ready[5]), .in_data(s_data[5]),
    .out_valid(s_valid[6]), .out_ready(s_ready[6]), .out_data(s_data[6]));

  upsample8 #(.C(64), .W(W/8), .FACTOR(8)) upsample (
    .clk, .rst_n, .in_valid(s_valid[6]), .in_ready(s_ready[6]), .in_data(s_data[6]),
    .out_valid(s_valid[7]), .out_ready(s_ready[7]), .out_data(s_data[7]));

  conv1x1 #(.CIN(64), .COUT(NCLS), .LAYER(9)) head_conv (
    .clk, .rst_n, .in_valid(s_valid[7]), .in_ready(s_ready[7]), .in_data(s_data[7]),
    .out_valid(l_valid), .out_ready(l_ready), .out_data(l_data));

  argmax #(.N_CLASSES(NCLS)) head_argmax (
    .clk, .rst_n, .in_valid(l_valid), .in_ready(l_ready), .in_data(l_data),
    .out_valid, .out_ready, .out_class);

endmodule
