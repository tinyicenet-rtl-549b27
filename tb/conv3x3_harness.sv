// conv3x3_harness -- drives one conv3x3 instance with random frames and
// checks every output word against tb_ref_pkg::conv3_ref.
//
// Run 0 streams at full speed (input always valid, output always ready)
// and checks the output cadence: within a pixel, the UF_OUT words of a
// group leave on consecutive cycles and a new group follows every
// max(CIN/UF_IN, UF_OUT) cycles -- so with UF_IN = CIN and UF_OUT = 1
// one output channel per cycle -- and the frame must take the cycle count predicted from the
// schedule.  Run 1 adds random gaps on the input and random back-pressure
// on the output.  `done` rises after both runs.
module conv3x3_harness
  import tinyicenet_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int CIN = 4, parameter int COUT = 4, parameter int H = 5, parameter int W = 6,
  parameter int UF_IN = 4, parameter int UF_OUT = 1, parameter int LAYER = 3
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  logic in_valid, in_ready, out_valid, out_ready;
  act_t in_data, out_data;

  conv3x3 #(.CIN(CIN), .COUT(COUT), .H(H), .W(W), .UF_IN(UF_IN), .UF_OUT(UF_OUT),
            .LAYER(LAYER)) dut (.*);

  localparam int NG_IN = CIN / UF_IN, NG_OUT = COUT / UF_OUT;
  localparam int P = (NG_IN > UF_OUT) ? NG_IN : UF_OUT;
  // schedule: every input word one cycle; per row one transition cycle,
  // CIN preload cycles and W pixels of CIN refill + NG_OUT*P MAC cycles;
  // the last group of the frame then drains UF_OUT words.
  localparam int EXPECT_CYC = H * W * CIN + H * (1 + CIN + W * (CIN + NG_OUT * P)) + UF_OUT;

  fmap_t x, ref_out;
  int nin, nout, mode, first_in, last_out, cyc, prev_out_cyc;

  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    done = 0; checks = 0; failures = 0; cyc = 0;
    in_valid = 0; in_data = '0; out_ready = 0;
    @(posedge rst_n);
    for (mode = 0; mode < 2; mode++) begin
      x = new[H * W * CIN];
      foreach (x[i]) x[i] = int'($urandom_range(0, 255)) - 128;
      ref_out = conv3_ref(x, H, W, CIN, COUT, LAYER);
      nin = 0; nout = 0; first_in = -1; last_out = 0; prev_out_cyc = -10;
      fork
        begin : drive
          while (nin < H * W * CIN) begin
            @(negedge clk);
            in_valid = (mode == 0) || ($urandom_range(0, 3) != 0);
            in_data  = act_t'(x[nin]);
            #1;
            if (in_valid && in_ready) begin
              if (first_in < 0) first_in = cyc;
              nin++;
            end
          end
          @(negedge clk);
          in_valid = 0;
        end
        begin : sink
          while (nout < H * W * COUT) begin
            @(negedge clk);
            out_ready = (mode == 0) || ($urandom_range(0, 2) != 0);
            #1;
            if (out_valid && out_ready) begin
              checks++;
              if (int'(out_data) != ref_out[nout]) begin
                failures++;
                if (failures < 10)
                  $display("conv3x3 L%0d mismatch word %0d: got %0d exp %0d", LAYER, nout,
                           out_data, ref_out[nout]);
              end
              if (mode == 0 && (nout % COUT) != 0) begin
                checks++;
                if (cyc != prev_out_cyc + (((nout % COUT) % UF_OUT != 0) ? 1 : P - UF_OUT + 1)) begin
                  failures++;
                  $display("conv3x3 L%0d: output channel %0d not on the next cycle", LAYER,
                           nout % COUT);
                end
              end
              prev_out_cyc = cyc;
              last_out = cyc;
              nout++;
            end
          end
        end
      join
      if (mode == 0) begin
        checks++;
        $display("conv3x3 L%0d CIN=%0d COUT=%0d UF_IN=%0d UF_OUT=%0d: frame %0d cycles (expected %0d)",
                 LAYER, CIN, COUT, UF_IN, UF_OUT, last_out - first_in + 1, EXPECT_CYC);
        if (last_out - first_in + 1 != EXPECT_CYC) failures++;
      end
      repeat (3) @(posedge clk);
    end
    done = 1;
  end
endmodule
