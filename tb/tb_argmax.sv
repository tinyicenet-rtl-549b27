// tb_argmax -- feeds groups of 7 logits (random, with deliberate ties and
// with the maximum placed at each position in turn) under random stalls
// and checks the class index against tb_ref_pkg::argmax_ref (first
// maximum wins).
module tb_argmax;
  import tinyicenet_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 7, NPIX = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logit_t in_data;
  logic [CLSW-1:0] out_class;
  int checks = 0, failures = 0;
  fmap_t x, e;

  argmax #(.N_CLASSES(N)) dut (.*);

  initial begin
    int nin, nout;
    in_valid = 0; in_data = 0; out_ready = 0;
    x = new[NPIX * N];
    foreach (x[i]) begin
      int p;
      p = i / N;
      if (p < N) x[i] = (i % N == p) ? 1000 : -int'($urandom_range(0, 5000));   // max at p
      else if (p < 2 * N) x[i] = 5;                                            // all equal
      else if (p % 3 == 0) x[i] = int'($urandom_range(0, 3)) - 8;             // many ties
      else x[i] = int'($urandom_range(0, 1 << 22)) - (1 << 21);
    end
    e = argmax_ref(x, NPIX, N);
    repeat (2) @(posedge clk);
    rst_n = 1;
    nin = 0; nout = 0;
    fork
      begin
        while (nin < NPIX * N) begin
          @(negedge clk);
          in_valid = ($urandom_range(0, 3) != 0);
          in_data  = logit_t'(x[nin]);
          #1;
          if (in_valid && in_ready) nin++;
        end
        @(negedge clk);
        in_valid = 0;
      end
      while (nout < NPIX) begin
        @(negedge clk);
        out_ready = ($urandom_range(0, 2) != 0);
        #1;
        if (out_valid && out_ready) begin
          checks++;
          if (int'(out_class) != e[nout]) begin
            failures++;
            if (failures < 10) $display("pixel %0d: got %0d exp %0d", nout, out_class, e[nout]);
          end
          nout++;
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
