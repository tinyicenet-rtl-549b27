// tb_dconv3 -- DConv-3 (two 3x3 conv + BN + ReLU layers in series) on two
// random frames, the first at full speed and the second with random input
// gaps and output back-pressure; every output word is compared with two
// chained tb_ref_pkg::conv3_ref passes.  The first layer is standard, the
// second SIPO, and the count of cycles the second layer holds off the
// first must be non-zero (internal back-pressure exercised).
module tb_dconv3;
  import tinyicenet_pkg::*;
  import tb_ref_pkg::*;
  localparam int CIN = 2, COUT = 4, H = 6, W = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  act_t in_data, out_data;
  int checks = 0, failures = 0, mid_stalls = 0;
  fmap_t x, e;

  dconv3 #(.CIN(CIN), .COUT(COUT), .H(H), .W(W), .UF_IN_A(2), .UF_OUT_A(1),
           .UF_IN_B(2), .UF_OUT_B(2), .LAYER_A(1)) dut (.*);

  always_ff @(posedge clk) if (dut.mid_valid && !dut.mid_ready) mid_stalls <= mid_stalls + 1;

  initial begin
    in_valid = 0; in_data = 0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      int nin, nout;
      x = new[H * W * CIN];
      foreach (x[i]) x[i] = int'($urandom_range(0, 255)) - 128;
      e = conv3_ref(conv3_ref(x, H, W, CIN, COUT, 1), H, W, COUT, COUT, 2);
      nin = 0; nout = 0;
      fork
        begin
          while (nin < H * W * CIN) begin
            @(negedge clk);
            in_valid = (f == 0) || ($urandom_range(0, 3) != 0);
            in_data  = act_t'(x[nin]);
            #1;
            if (in_valid && in_ready) nin++;
          end
          @(negedge clk);
          in_valid = 0;
        end
        while (nout < H * W * COUT) begin
          @(negedge clk);
          out_ready = (f == 0) || ($urandom_range(0, 2) != 0);
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
    end
    checks++;
    if (mid_stalls == 0) failures++;
    $display("cycles the second layer held off the first: %0d", mid_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
