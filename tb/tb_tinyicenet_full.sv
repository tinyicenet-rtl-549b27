// tb_tinyicenet_full -- one complete 2 x 512 x 512 scene through the
// accelerator with every parameter at its default.
//
// The scene is a synthetic dual-polarisation pattern (smooth HH/HV fields
// with a few sharp-edged "floes" and pseudo-random speckle), streamed at
// full speed.  All 262,144 output classes are compared with the
// tb_ref_pkg::net_ref model of the whole network, and the number of clock
// cycles for the scene is reported.
module tb_tinyicenet_full;
  import tinyicenet_pkg::*;
  import tb_ref_pkg::*;
  localparam int H = 512, W = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  act_t in_data;
  logic [CLSW-1:0] out_class;
  int checks = 0, failures = 0, cyc = 0;
  int class_count [NCLS];
  fmap_t x, e;

  tinyicenet_top dut (.*);
  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    int nin, nout, c0;
    in_valid = 0; in_data = 0; out_ready = 1;
    foreach (class_count[k]) class_count[k] = 0;
    x = new[H * W * 2];
    for (int y = 0; y < H; y++)
      for (int xx = 0; xx < W; xx++) begin
        int hh, hv, sp;
        sp = int'(mix32(32'(y * W + xx)) % 32) - 16;
        hh = ((y / 64 + xx / 96) % 2 == 0) ? 60 : -40;
        hv = ((y - 256) * (y - 256) + (xx - 200) * (xx - 200) < 120 * 120) ? 70 : -70 + xx / 8;
        x[(y * W + xx) * 2]     = (hh + sp > 127) ? 127 : (hh + sp < -127) ? -127 : hh + sp;
        x[(y * W + xx) * 2 + 1] = (hv - sp > 127) ? 127 : (hv - sp < -127) ? -127 : hv - sp;
      end
    e = net_ref(x, H, W);
    $display("reference model done");
    repeat (2) @(posedge clk);
    rst_n = 1;
    nin = 0; nout = 0; c0 = cyc;
    fork
      begin
        while (nin < H * W * 2) begin
          @(negedge clk);
          in_valid = 1;
          in_data  = act_t'(x[nin]);
          #1;
          if (in_ready) nin++;
        end
        @(negedge clk);
        in_valid = 0;
      end
      while (nout < H * W) begin
        @(negedge clk);
        #1;
        if (out_valid) begin
          checks++;
          class_count[out_class]++;
          if (int'(out_class) != e[nout]) begin
            failures++;
            if (failures < 10) $display("pixel %0d: got %0d exp %0d", nout, out_class, e[nout]);
          end
          nout++;
        end
      end
    join
    $display("scene of %0d x %0d pixels took %0d cycles", H, W, cyc - c0);
    foreach (class_count[k]) $display("  class %0d: %0d pixels", k, class_count[k]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
