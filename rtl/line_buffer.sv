// line_buffer -- the "read and buffer" stage of a streaming convolution.
//
// Stores KH complete image rows of all C channels (KH x W x C words, the
// size given for the line buffer of the streaming convolution).  Rows are
// kept in KH banks used round-robin: image row y lives in bank y mod KH.
// The writer fills one word per cycle in raster (row, column, channel)
// order; the reader fetches the same (column, channel) word from all KH
// banks in one cycle, i.e. one vertical column of the window.
//
// Interface: synchronous write, combinational (distributed-RAM style)
// read.  No reset: a word is read only after it was written.
module line_buffer
  import tinyicenet_pkg::*;
#(
  parameter int KH = 3,
  parameter int W  = 512,
  parameter int C  = 16,
  localparam int CWW = (W > 1) ? $clog2(W) : 1,
  localparam int CHW = (C > 1) ? $clog2(C) : 1,
  localparam int BKW = (KH > 1) ? $clog2(KH) : 1
) (
  input  logic           clk,
  input  logic           wr_en,
  input  logic [BKW-1:0] wr_bank,
  input  logic [CWW-1:0] wr_col,
  input  logic [CHW-1:0] wr_ch,
  input  act_t           wr_data,
  input  logic [CWW-1:0] rd_col,
  input  logic [CHW-1:0] rd_ch,
  output act_t           rd_data [KH]   // rd_data[b] comes from bank b
);
  // one single-write, single-read memory per bank
  for (genvar b = 0; b < KH; b++) begin : g_bank
    act_t mem [W*C];
    always_ff @(posedge clk) begin
      if (wr_en && int'(wr_bank) == b) mem[int'(wr_col) * C + int'(wr_ch)] <= wr_data;
    end
    assign rd_data[b] = mem[int'(rd_col) * C + int'(rd_ch)];
  end
endmodule
