// conv3x3 -- streaming 3x3 convolution + BN + ReLU, in the standard
// (UF_OUT = 1) or the serial-in parallel-out, SIPO (UF_OUT > 1), form.
//
// Data format.  Input and output are channel-serial int8 streams with a
// valid/ready handshake: one word per beat, pixels in raster order, the
// channels of a pixel on consecutive beats (HWC order).  Frames follow each
// other with no marker; the module counts H x W x C words per frame.
// Zero padding of one pixel keeps the H x W size.
//
// Structure (three stages, as in the streaming convolution template):
//  * read and buffer: every input word goes into a line_buffer of 3 rows
//    x W x CIN; a window_buffer holds the 3 x 3 x CIN window of the pixel
//    being computed.  Moving one pixel right shifts the window and refills
//    its right column in CIN cycles (3 words per cycle, one per row).
//  * compute: a grid of UF_OUT x UF_IN mult_arrays (9 multipliers each)
//    feeds UF_OUT adder_trees.  Each cycle it consumes UF_IN input
//    channels of the window for UF_OUT output channels; after CIN/UF_IN
//    cycles UF_OUT accumulators are complete and pass through
//    bn_relu_quant.  With UF_IN = CIN and UF_OUT = 1 this produces one
//    output channel per cycle (the standard case); with UF_OUT > 1 the
//    same window serves UF_OUT output channels at once (SIPO).
//  * write: the UF_OUT results wait in a small output buffer and leave
//    one per beat while the next group is computed.  The UF_OUT parallel
//    output streams of the SIPO variant are thus merged into the single
//    channel-serial stream the next layer reads.
//
// Scheduling (this design's choice).  Output row r is computed once input
// rows up to r+1 are buffered; input is held off (in_ready low) while a row
// is computed, because the 3-row buffer still needs all three rows.  Cycles
// per output pixel, with no back-pressure:  CIN (window refill) +
// (COUT/UF_OUT) * max(CIN/UF_IN, UF_OUT), plus CIN per row for the initial
// column and CIN per row for the zero right border column.
//
// Weights and BN constants are ROMs filled from the package formulas (see
// tinyicenet_pkg).  CIN must be a multiple of UF_IN, COUT of UF_OUT.
module conv3x3
  import tinyicenet_pkg::*;
#(
  parameter int CIN    = 16,
  parameter int COUT   = 16,
  parameter int H      = 512,
  parameter int W      = 512,
  parameter int UF_IN  = 16,
  parameter int UF_OUT = 1,
  parameter int LAYER  = 2
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
  localparam int NG_IN  = CIN / UF_IN;
  localparam int NG_OUT = COUT / UF_OUT;
  localparam int CWW = $clog2(W + 1);
  localparam int RWW = $clog2(H + 2);
  localparam int CHW = (CIN > 1) ? $clog2(CIN) : 1;
  localparam int GIW = (NG_IN > 1) ? $clog2(NG_IN) : 1;
  localparam int GOW = (NG_OUT > 1) ? $clog2(NG_OUT) : 1;
  localparam int UOW = $clog2(UF_OUT + 1);
  localparam int SHIFT = bn_shift(CIN);

  // ---------------- parameter ROMs ----------------
  wgt_t               wrom [COUT][CIN][9];
  logic [7:0]         srom [COUT];
  logic signed [23:0] brom [COUT];
  initial begin
    for (int co = 0; co < COUT; co++) begin
      srom[co] = bn_scale(LAYER, co);
      brom[co] = bn_bias(LAYER, co, CIN);
      for (int ci = 0; ci < CIN; ci++)
        for (int k = 0; k < 9; k++) wrom[co][ci][k] = conv_weight(LAYER, co, ci, k / 3, k % 3);
    end
  end

  // ---------------- input side ----------------
  typedef enum logic [1:0] {S_FILL, S_LOAD, S_MAC} state_t;
  state_t state;

  logic [CWW-1:0] in_col;
  logic [CHW-1:0] in_ch;
  logic [RWW-1:0] in_row;     // number of complete input rows buffered
  logic [1:0]     in_bank;    // in_row mod 3
  logic [RWW-1:0] out_row;    // row being produced
  logic [1:0]     out_bank;   // out_row mod 3
  logic [RWW-1:0] need;       // rows that must be buffered before out_row

  assign need     = (int'(out_row) + 2 > H) ? RWW'(H) : out_row + RWW'(2);
  assign in_ready = (state == S_FILL) && (in_row < need);

  wire in_fire = in_valid && in_ready;

  // ---------------- line buffer / window ----------------
  logic [CWW-1:0] ld_col;     // column being loaded into the window (0..W)
  logic [CHW-1:0] ld_ch;
  act_t           lb_rd [3];
  act_t           win_col [3];
  act_t           win [3][3][CIN];

  line_buffer #(.KH(3), .W(W), .C(CIN)) u_lb (
    .clk, .wr_en(in_fire), .wr_bank(in_bank),
    .wr_col(in_col[$clog2(W > 1 ? W : 2)-1:0]), .wr_ch(in_ch), .wr_data(in_data),
    .rd_col((ld_col < CWW'(W)) ? ld_col[$clog2(W > 1 ? W : 2)-1:0] : '0), .rd_ch(ld_ch),
    .rd_data(lb_rd)
  );

  // map banks to window rows: top = row r-1, mid = row r, bottom = row r+1
  always_comb begin
    logic [1:0] bt, bb;
    bt = (out_bank == 2'd0) ? 2'd2 : out_bank - 2'd1;
    bb = (out_bank == 2'd2) ? 2'd0 : out_bank + 2'd1;
    win_col[0] = (out_row == '0)             ? act_t'(0) : lb_rd[bt];
    win_col[1] = lb_rd[out_bank];
    win_col[2] = (int'(out_row) == H - 1)    ? act_t'(0) : lb_rd[bb];
    if (ld_col >= CWW'(W)) for (int y = 0; y < 3; y++) win_col[y] = '0;
  end

  logic win_clear;
  assign win_clear = (state == S_FILL) && (in_row >= need) && (int'(out_row) < H);

  window_buffer #(.KH(3), .KW(3), .C(CIN)) u_win (
    .clk, .rst_n, .clear(win_clear),
    .shift(state == S_LOAD && ld_ch == '0),
    .wr_en(state == S_LOAD), .wr_ch(ld_ch), .wr_col(win_col), .win
  );

  // ---------------- compute grid ----------------
  logic [GIW-1:0] cig;
  logic [GOW-1:0] cog;
  acc_t  acc     [UF_OUT];
  acc_t  partial [UF_OUT];
  acc_t  acc_cur [UF_OUT];
  act_t  res     [UF_OUT];

  for (genvar u = 0; u < UF_OUT; u++) begin : g_out
    prod_t prods [UF_IN*9];
    for (genvar i = 0; i < UF_IN; i++) begin : g_in
      act_t  a [9];
      wgt_t  w [9];
      prod_t p [9];
      always_comb begin
        int ci, co;
        ci = int'(cig) * UF_IN + i;
        co = int'(cog) * UF_OUT + u;
        for (int k = 0; k < 9; k++) begin
          a[k] = win[k/3][k%3][ci];
          w[k] = wrom[co][ci][k];
        end
      end
      mult_array #(.N(9)) u_ma (.a, .w, .p);
      always_comb for (int k = 0; k < 9; k++) prods[i*9+k] = p[k];
    end
    adder_tree #(.N(UF_IN*9), .IW(PW), .OW(AW)) u_tree (.in(prods), .sum(partial[u]));
    assign acc_cur[u] = ((cig == '0) ? acc_t'(0) : acc[u]) + partial[u];
    bn_relu_quant u_bn (
      .acc(acc_cur[u]), .scale(srom[int'(cog) * UF_OUT + u]),
      .bias(brom[int'(cog) * UF_OUT + u]), .shift(5'(SHIFT)), .y(res[u])
    );
  end

  // ---------------- output buffer ----------------
  act_t           obuf [UF_OUT];
  logic [UOW-1:0] ocnt, oidx;
  assign out_valid = (ocnt != '0);
  assign out_data  = obuf[oidx];
  wire out_fire = out_valid && out_ready;
  wire grp_last = (int'(cig) == NG_IN - 1);
  wire can_load = (ocnt == '0) || (ocnt == UOW'(1) && out_ready);
  wire grp_done = (state == S_MAC) && grp_last && can_load;

  // ---------------- control ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_FILL;
      in_col <= '0; in_ch <= '0; in_row <= '0; in_bank <= '0;
      out_row <= '0; out_bank <= '0;
      ld_col <= '0; ld_ch <= '0; cig <= '0; cog <= '0;
      ocnt <= '0; oidx <= '0;
      for (int u = 0; u < UF_OUT; u++) begin acc[u] <= '0; obuf[u] <= '0; end
    end else begin
      // input counters
      if (in_fire) begin
        if (int'(in_ch) == CIN - 1) begin
          in_ch <= '0;
          if (int'(in_col) == W - 1) begin
            in_col  <= '0;
            in_row  <= in_row + 1'b1;
            in_bank <= (in_bank == 2'd2) ? 2'd0 : in_bank + 2'd1;
          end else in_col <= in_col + 1'b1;
        end else in_ch <= in_ch + 1'b1;
      end

      // output buffer
      if (out_fire) begin
        ocnt <= ocnt - 1'b1;
        oidx <= oidx + 1'b1;
      end
      if (grp_done) begin
        for (int u = 0; u < UF_OUT; u++) obuf[u] <= res[u];
        ocnt <= UOW'(UF_OUT);
        oidx <= '0;
      end

      unique case (state)
        S_FILL: if (win_clear) begin
          state  <= S_LOAD;
          ld_col <= '0;
          ld_ch  <= '0;
        end
        S_LOAD: begin
          if (int'(ld_ch) == CIN - 1) begin
            ld_ch <= '0;
            if (ld_col == '0) ld_col <= ld_col + 1'b1;   // first column only preloads
            else begin
              state <= S_MAC;
              cig   <= '0;
              cog   <= '0;
            end
          end else ld_ch <= ld_ch + 1'b1;
        end
        S_MAC: begin
          if (!grp_last) begin
            for (int u = 0; u < UF_OUT; u++) acc[u] <= acc_cur[u];
            cig <= cig + 1'b1;
          end else if (can_load) begin
            cig <= '0;
            if (int'(cog) == NG_OUT - 1) begin
              cog <= '0;
              if (int'(ld_col) == W) begin       // row finished
                if (int'(out_row) == H - 1) begin  // frame finished
                  out_row <= '0; out_bank <= '0;
                  in_row  <= '0; in_bank  <= '0;
                end else begin
                  out_row  <= out_row + 1'b1;
                  out_bank <= (out_bank == 2'd2) ? 2'd0 : out_bank + 2'd1;
                end
                state <= S_FILL;
              end else begin
                ld_col <= ld_col + 1'b1;
                state  <= S_LOAD;
              end
            end else cog <= cog + 1'b1;
          end
        end
        default: state <= S_FILL;
      endcase
    end
  end

  // handshake rule: a word offered downstream stays put until taken
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
