// conv1x1 -- pointwise convolution, the classifier of the segmentation head.
//
// Projects the CIN (64) channels of a pixel onto COUT (7) class logits.
// As in the pointwise variant of the streaming convolution, no line or
// window buffer is needed: an input buffer collects the CIN channel words
// of one pixel, then CIN parallel multipliers and an adder tree form one
// dot product per cycle, i.e. one class logit per output beat.  The logit
// is the raw sum plus a per-class bias (no BN, no ReLU, no requantisation).
//
// Handshake: valid/ready on both sides.  Per pixel: CIN input cycles, then
// COUT output cycles during which input is held off.
module conv1x1
  import tinyicenet_pkg::*;
#(
  parameter int CIN   = 64,
  parameter int COUT  = 7,
  parameter int LAYER = 9
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  act_t   in_data,
  output logic   out_valid,
  input  logic   out_ready,
  output logit_t out_data
);
  localparam int CHW = (CIN > 1) ? $clog2(CIN) : 1;
  localparam int COW = (COUT > 1) ? $clog2(COUT) : 1;

  wgt_t   wrom [COUT][CIN];
  logit_t brom [COUT];
  initial begin
    for (int co = 0; co < COUT; co++) begin
      brom[co] = pw_bias(co);
      for (int ci = 0; ci < CIN; ci++) wrom[co][ci] = conv_weight(LAYER, co, ci, 0, 0);
    end
  end

  act_t           ibuf [CIN];
  logic           emit;
  logic [CHW-1:0] ich;
  logic [COW-1:0] co;

  assign in_ready  = !emit;
  assign out_valid = emit;

  prod_t p [CIN];
  wgt_t  wsel [CIN];
  acc_t  dot;
  always_comb for (int i = 0; i < CIN; i++) wsel[i] = wrom[co][i];
  mult_array #(.N(CIN)) u_mul (.a(ibuf), .w(wsel), .p);
  adder_tree #(.N(CIN), .IW(PW), .OW(AW)) u_tree (.in(p), .sum(dot));
  assign out_data = logit_t'(dot) + brom[co];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      emit <= 1'b0; ich <= '0; co <= '0;
      for (int i = 0; i < CIN; i++) ibuf[i] <= '0;
    end else if (!emit) begin
      if (in_valid) begin
        ibuf[ich] <= in_data;
        if (int'(ich) == CIN - 1) begin
          ich  <= '0;
          emit <= 1'b1;
        end else ich <= ich + 1'b1;
      end
    end else if (out_ready) begin
      if (int'(co) == COUT - 1) begin
        co   <= '0;
        emit <= 1'b0;
      end else co <= co + 1'b1;
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
