// tb_maxpool2 -- streams two random H x W x C frames through the 2x2 max
// pooling with random input gaps and output back-pressure and compares
// every output word with tb_ref_pkg::pool_ref.  A third, full-speed frame
// checks the rate: one input word accepted per cycle.
module tb_maxpool2;
  import tinyicenet_pkg::*;
  import tb_ref_pkg::*;
  localparam int C = 3, W = 8, H = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  act_t in_data, out_data;
  int checks = 0, failures = 0, cyc = 0;
  fmap_t x, e;

  maxpool2 #(.C(C), .W(W)) dut (.*);
  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    in_valid = 0; in_data = 0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      int nin, nout, c0;
      x = new[H * W * C];
      foreach (x[i]) x[i] = int'($urandom_range(0, 255)) - 128;
      e = pool_ref(x, H, W, C);
      nin = 0; nout = 0; c0 = cyc;
      fork
        begin
          while (nin < H * W * C) begin
            @(negedge clk);
            in_valid = (f == 2) || ($urandom_range(0, 3) != 0);
            in_data  = act_t'(x[nin]);
            #1;
            if (in_valid && in_ready) nin++;
          end
          @(negedge clk);
          in_valid = 0;
        end
        while (nout < (H / 2) * (W / 2) * C) begin
          @(negedge clk);
          out_ready = (f == 2) || ($urandom_range(0, 2) != 0);
          #1;
          if (out_valid && out_ready) begin
            checks++;
            if (int'(out_data) != e[nout]) begin
              failures++;
              if (failures < 10) $display("word %0d: got %0d exp %0d", nout, out_data, e[nout]);
            end
            nout++;
          end
        end
      join
      if (f == 2) begin
        checks++;
        // H*W*C input beats, the last output appears one cycle later
        if (cyc - c0 != H * W * C + 1) begin
          failures++;
          $display("full-speed frame took %0d cycles, expected %0d", cyc - c0, H * W * C + 1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
