// window_buffer -- the KH x KW x C sliding window of a streaming convolution.
//
// Holds, for every input channel, the KH x KW neighbourhood of the output
// pixel being computed.  Column KW-1 is the newest (rightmost) column.
// Advancing one pixel to the right is a `shift` (every column moves one
// place left) followed by writing the new right column one channel per
// cycle (`wr_en`, `wr_ch`, `wr_col` = the KH words of that column).  A
// shift and the write of the first channel may happen in the same cycle.
// `clear` zeroes the window, which provides the zero padding on the left
// border at the start of each row.  The window size (Kh x Kw x Cin) is the
// one given for the streaming convolution; the refill order, one channel
// of the new column per cycle, is this design's choice.
module window_buffer
  import tinyicenet_pkg::*;
#(
  parameter int KH = 3,
  parameter int KW = 3,
  parameter int C  = 16,
  localparam int CHW = (C > 1) ? $clog2(C) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           shift,
  input  logic           wr_en,
  input  logic [CHW-1:0] wr_ch,
  input  act_t           wr_col [KH],
  output act_t           win [KH][KW][C]
);
  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int y = 0; y < KH; y++)
        for (int x = 0; x < KW; x++)
          for (int c = 0; c < C; c++) win[y][x][c] <= '0;
    end else begin
      if (shift) begin
        for (int y = 0; y < KH; y++)
          for (int x = 0; x < KW - 1; x++)
            for (int c = 0; c < C; c++) win[y][x][c] <= win[y][x+1][c];
      end
      if (wr_en) begin
        for (int y = 0; y < KH; y++) win[y][KW-1][wr_ch] <= wr_col[y];
      end
    end
  end
endmodule
