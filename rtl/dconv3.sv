// dconv3 -- "DConv-3": two 3x3 convolutions, each with BN and ReLU, in
// series (Conv3x3-BN-ReLU-Conv3x3-BN-ReLU).  The first maps CIN to COUT
// channels, the second COUT to COUT, both at H x W with zero padding.
//
// Both layers are conv3x3 instances joined by their channel-serial stream;
// back-pressure from the second stalls the first.  The unroll factors of
// each layer are parameters (UF_IN_A/UF_OUT_A for the first layer, _B for
// the second) because the paper does not fix them; LAYER_A selects the
// weight set of the first layer and LAYER_A+1 that of the second.
module dconv3
  import tinyicenet_pkg::*;
#(
  parameter int CIN      = 2,
  parameter int COUT     = 16,
  parameter int H        = 512,
  parameter int W        = 512,
  parameter int UF_IN_A  = 2,
  parameter int UF_OUT_A = 1,
  parameter int UF_IN_B  = 8,
  parameter int UF_OUT_B = 2,
  parameter int LAYER_A  = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  act_t in_data,
  output logic out_valid,
  input  logic out_ready,
  output act_t out_data
);
  logic mid_valid, mid_ready;
  act_t mid_data;

  conv3x3 #(.CIN(CIN), .COUT(COUT), .H(H), .W(W), .UF_IN(UF_IN_A),
            .UF_OUT(UF_OUT_A), .LAYER(LAYER_A)) u_conv_a (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(mid_valid), .out_ready(mid_ready), .out_data(mid_data)
  );

  conv3x3 #(.CIN(COUT), .COUT(COUT), .H(H), .W(W), .UF_IN(UF_IN_B),
            .UF_OUT(UF_OUT_B), .LAYER(LAYER_A + 1)) u_conv_b (
    .clk, .rst_n, .in_valid(mid_valid), .in_ready(mid_ready), .in_data(mid_data),
    .out_valid, .out_ready, .out_data
  );
endmodule
