// tb_upsample8 -- streams random H x W x C maps through the x8 nearest
// neighbour upsampler with random stalls and compares all 64*H*W*C output
// words with tb_ref_pkg::up_ref; a full-speed map checks the timing of
// W*C fill cycles plus 64*W*C emit cycles per input row.
module tb_upsample8;
  import tinyicenet_pkg::*;
  import tb_ref_pkg::*;
  localparam int C = 3, W = 4, H = 3, F = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  act_t in_data, out_data;
  int checks = 0, failures = 0, cyc = 0;
  fmap_t x, e;

  upsample8 #(.C(C), .W(W), .FACTOR(F)) dut (.*);
  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    in_valid = 0; in_data = 0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      int nin, nout, c0;
      x = new[H * W * C];
      foreach (x[i]) x[i] = int'($urandom_range(0, 255)) - 128;
      e = up_ref(x, H, W, C, F);
      nin = 0; nout = 0; c0 = cyc;
      fork
        begin
          while (nin < H * W * C) begin
            @(negedge clk);
            in_valid = (f == 1) || ($urandom_range(0, 3) != 0);
            in_data  = act_t'(x[nin]);
            #1;
            if (in_valid && in_ready) nin++;
          end
          @(negedge clk);
          in_valid = 0;
        end
        while (nout < H * W * C * F * F) begin
          @(negedge clk);
          out_ready = (f == 1) || ($urandom_range(0, 2) != 0);
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
      if (f == 1) begin
        checks++;
        if (cyc - c0 != H * (W * C + F * F * W * C)) begin
          failures++;
          $display("full-speed map took %0d cycles, expected %0d", cyc - c0,
                   H * (W * C + F * F * W * C));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
