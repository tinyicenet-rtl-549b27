// maxpool2 -- 2x2, stride-2 pooling ("Pooling-2") on a channel-serial stream.
//
// Input: H x W x C int8 words in HWC raster order.  Output: H/2 x W/2 x C
// words in the same order.  A buffer of W/2 x C partial maxima collects
// the even row; on the odd row each 2x2 block is completed and its maximum
// is emitted when its last word (odd row, odd column) arrives.  The paper
// names the operation "pooling"; max pooling is this design's choice.
//
// Handshake: valid/ready on both sides; one registered output word; input
// is accepted whenever the output register is empty or being emptied, so
// a word flows through in one cycle.  H is not needed: rows alternate.
module maxpool2
  import tinyicenet_pkg::*;
#(
  parameter int C = 16,
  parameter int W = 512
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
  localparam int CWW = (W > 1) ? $clog2(W) : 1;
  localparam int PWW = (W > 2) ? $clog2(W / 2) : 1;

  act_t           pm [W/2][C];   // partial maxima of the current row pair
  logic [CHW-1:0] ch;
  logic [CWW-1:0] col;
  logic           odd_row;

  assign in_ready = !out_valid || out_ready;
  wire in_fire = in_valid && in_ready;

  logic [PWW-1:0] pcol;            // pooled column, col / 2
  act_t prev, m;
  assign pcol = PWW'(col >> 1);
  assign prev = pm[pcol][ch];
  assign m    = (in_data > prev) ? in_data : prev;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ch <= '0; col <= '0; odd_row <= 1'b0;
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_fire) begin
        if (!odd_row && !col[0]) pm[pcol][ch] <= in_data;      // first word of the block
        else if (!(odd_row && col[0])) pm[pcol][ch] <= m;      // middle words
        else begin                                                 // last word: emit
          out_data  <= m;
          out_valid <= 1'b1;
        end
        if (int'(ch) == C - 1) begin
          ch <= '0;
          if (int'(col) == W - 1) begin
            col <= '0;
            odd_row <= !odd_row;
          end else col <= col + 1'b1;
        end else ch <= ch + 1'b1;
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
