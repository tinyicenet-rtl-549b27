// tb_window_buffer -- slides the 3x3xC window along a row of a reference
// image (shift + per-channel column writes) and checks that after each
// step the window holds exactly the pixels x-2..x of the three rows; also
// checks that clear zeroes it.
module tb_window_buffer;
  import tinyicenet_pkg::*;
  localparam int C = 5, W = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, shift, wr_en;
  logic [2:0] wr_ch;
  act_t wr_col [3];
  act_t win [3][3][C];
  int img [3][W][C];
  int checks = 0, failures = 0;

  window_buffer #(.KH(3), .KW(3), .C(C)) dut (.*);

  initial begin
    clear = 0; shift = 0; wr_en = 0; wr_ch = 0;
    for (int y = 0; y < 3; y++) wr_col[y] = '0;
    foreach (img[y, x, c]) img[y][x][c] = int'($urandom_range(0, 255)) - 128;
    @(negedge clk); rst_n = 1;
    for (int x = 0; x < W; x++) begin
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        shift = (c == 0); wr_en = 1; wr_ch = 3'(c);
        for (int y = 0; y < 3; y++) wr_col[y] = act_t'(img[y][x][c]);
      end
      @(negedge clk);
      shift = 0; wr_en = 0;
      for (int kx = 0; kx < 3; kx++)
        for (int y = 0; y < 3; y++)
          for (int c = 0; c < C; c++) begin
            int xx, e;
            xx = x - 2 + kx;
            e = (xx < 0) ? 0 : img[y][xx][c];
            checks++;
            if (int'(win[y][kx][c]) != e) begin
              failures++;
              if (failures < 10) $display("x=%0d win[%0d][%0d][%0d]=%0d exp %0d", x, y, kx, c,
                                          win[y][kx][c], e);
            end
          end
    end
    clear = 1;
    @(negedge clk);
    clear = 0;
    foreach (win[y, x, c]) begin
      checks++;
      if (win[y][x][c] != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
