// tb_line_buffer -- writes rows of W x C words round-robin into the three
// banks and reads back whole columns, checking that each bank returns the
// word of the row it was last given and that a bank keeps its contents
// while the other banks are written.
module tb_line_buffer;
  import tinyicenet_pkg::*;
  localparam int KH = 3, W = 10, C = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en;
  logic [1:0] wr_bank;
  logic [3:0] wr_col, rd_col;
  logic [1:0] wr_ch, rd_ch;
  act_t wr_data, rd_data [KH];
  int checks = 0, failures = 0;
  int model [KH][W*C];

  line_buffer #(.KH(KH), .W(W), .C(C)) dut (.*);

  task automatic check_all();
    for (int col = 0; col < W; col++)
      for (int ch = 0; ch < C; ch++) begin
        rd_col = 4'(col); rd_ch = 2'(ch);
        #1;
        for (int b = 0; b < KH; b++) begin
          checks++;
          if (int'(rd_data[b]) != model[b][col*C+ch]) begin
            failures++;
            if (failures < 10) $display("bank %0d col %0d ch %0d: got %0d exp %0d", b, col, ch,
                                        rd_data[b], model[b][col*C+ch]);
          end
        end
      end
  endtask

  initial begin
    wr_en = 0; wr_bank = 0; wr_col = 0; wr_ch = 0; wr_data = 0; rd_col = 0; rd_ch = 0;
    for (int row = 0; row < 7; row++) begin
      for (int col = 0; col < W; col++)
        for (int ch = 0; ch < C; ch++) begin
          @(negedge clk);
          wr_en = 1; wr_bank = 2'(row % KH); wr_col = 4'(col); wr_ch = 2'(ch);
          wr_data = act_t'($urandom);
          model[row % KH][col*C+ch] = int'(wr_data);
        end
      @(negedge clk);
      wr_en = 0;
      if (row >= 2) check_all();
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
