// tb_conv1x1 -- streams random 64-channel pixels into the pointwise
// classifier with random stalls and compares the 7 logits of every pixel
// with tb_ref_pkg::pw_ref; a full-speed run checks CIN + COUT cycles per
// pixel.
module tb_conv1x1;
  import tinyicenet_pkg::*;
  import tb_ref_pkg::*;
  localparam int CIN = 64, COUT = 7, NPIX = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  act_t in_data;
  logit_t out_data;
  int checks = 0, failures = 0, cyc = 0;
  fmap_t x, e;

  conv1x1 #(.CIN(CIN), .COUT(COUT), .LAYER(9)) dut (.*);
  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    in_valid = 0; in_data = 0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      int nin, nout, c0;
      x = new[NPIX * CIN];
      foreach (x[i]) x[i] = (f == 0) ? int'($urandom_range(0, 127))
                                     : int'($urandom_range(0, 255)) - 128;
      e = pw_ref(x, NPIX, CIN, COUT, 9);
      nin = 0; nout = 0; c0 = cyc;
      fork
        begin
          while (nin < NPIX * CIN) begin
            @(negedge clk);
            in_valid = (f == 1) || ($urandom_range(0, 3) != 0);
            in_data  = act_t'(x[nin]);
            #1;
            if (in_valid && in_ready) nin++;
          end
          @(negedge clk);
          in_valid = 0;
        end
        while (nout < NPIX * COUT) begin
          @(negedge clk);
          out_ready = (f == 1) || ($urandom_range(0, 2) != 0);
          #1;
          if (out_valid && out_ready) begin
            checks++;
            if (int'(out_data) != e[nout]) begin
              failures++;
              if (failures < 10) $display("logit %0d: got %0d exp %0d", nout, out_data, e[nout]);
            end
            nout++;
          end
        end
      join
      if (f == 1) begin
        checks++;
        if (cyc - c0 != NPIX * (CIN + COUT)) begin
          failures++;
          $display("full-speed run took %0d cycles, expected %0d", cyc - c0, NPIX * (CIN + COUT));
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
