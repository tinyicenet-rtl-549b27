// upsample8 -- nearest-neighbour upsampling by FACTOR (8) in both
// dimensions on a channel-serial stream.
//
// The decoder of the network restores full resolution with a single x8
// upsampling of the 64-channel bottleneck.  This block buffers one input
// row (W x C words), then replays it FACTOR times; within each replayed
// row every pixel is repeated FACTOR times, channels in order.  Input is
// held off while a row is replayed.  Nearest-neighbour interpolation is
// this design's choice; the paper gives only the factor.
//
// Timing: per input row, W*C cycles to fill and FACTOR*FACTOR*W*C cycles
// to emit, with no back-pressure.
module upsample8
  import tinyicenet_pkg::*;
#(
  parameter int C      = 64,
  parameter int W      = 64,
  parameter int FACTOR = 8
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
  localparam int CHW = (C > 1) ? $clog2(C) : 1;
  localparam int XW  = $clog2(W * FACTOR);
  localparam int RW  = $clog2(FACTOR);
  localparam int AWD = $clog2(W * C);

  act_t           rowbuf [W*C];
  logic           emit;            // 0: filling, 1: replaying
  logic [AWD-1:0] waddr;
  logic [CHW-1:0] ch;
  logic [XW-1:0]  x;               // output column
  logic [RW-1:0]  rep;             // output row within the group of FACTOR

  assign in_ready  = !emit;
  assign out_valid = emit;
  assign out_data  = rowbuf[int'(x) / FACTOR * C + int'(ch)];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      emit <= 1'b0; waddr <= '0; ch <= '0; x <= '0; rep <= '0;
    end else if (!emit) begin
      if (in_valid) begin
        rowbuf[waddr] <= in_data;
        if (int'(waddr) == W * C - 1) begin
          waddr <= '0;
          emit  <= 1'b1;
        end else waddr <= waddr + 1'b1;
      end
    end else if (out_ready) begin
      if (int'(ch) == C - 1) begin
        ch <= '0;
        if (int'(x) == W * FACTOR - 1) begin
          x <= '0;
          if (int'(rep) == FACTOR - 1) begin
            rep  <= '0;
            emit <= 1'b0;
          end else rep <= rep + 1'b1;
        end else x <= x + 1'b1;
      end else ch <= ch + 1'b1;
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
