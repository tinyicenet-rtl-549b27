// tb_tinyicenet_top -- end-to-end test of the whole accelerator at a
// reduced scene size (H = W = 16, so the bottleneck is 2 x 2).
//
// Two random dual-channel scenes are streamed through: the first at full
// speed, the second with random input gaps and output back-pressure.
// Every class of the output map is compared with tb_ref_pkg::net_ref.
// The testbench also counts how often each mechanism of the design
// occurred and fails if one never did: input stalls (in_ready low while
// the source has data), back-pressure between layers, SIPO and standard
// conv groups, pooling outputs, upsampling row replays, pointwise logits,
// and more than one distinct class in the map.
module tb_tinyicenet_top;
  import tinyicenet_pkg::*;
  import tb_ref_pkg::*;
  localparam int H = 16, W = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  act_t in_data;
  logic [CLSW-1:0] out_class;
  int checks = 0, failures = 0;
  int n_in_stall = 0, n_internal_bp = 0, n_sipo = 0, n_std = 0, n_pool = 0, n_up = 0,
      n_logit = 0, n_out_bp = 0;
  int class_seen [NCLS];
  fmap_t x, e;

  tinyicenet_top #(.H(H), .W(W)) dut (.*);

  always_ff @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) n_in_stall <= n_in_stall + 1;
    if (out_valid && !out_ready) n_out_bp <= n_out_bp + 1;
    for (int k = 0; k < 8; k++)
      if (dut.s_valid[k] && !dut.s_ready[k]) n_internal_bp <= n_internal_bp + 1;
    if (dut.input_block.u_conv_b.grp_done) n_sipo <= n_sipo + 1;
    if (dut.contract_block0.u_conv_a.grp_done) n_std <= n_std + 1;
    if (dut.s_valid[1] && dut.s_ready[1]) n_pool <= n_pool + 1;
    if (dut.upsample.emit && dut.upsample.out_ready && dut.upsample.ch == '0 &&
        dut.upsample.x == '0) n_up <= n_up + 1;
    if (dut.l_valid && dut.l_ready) n_logit <= n_logit + 1;
  end

  task automatic expect_event(string what, int n);
    checks++;
    $display("  %-34s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("  ^ never happened");
    end
  endtask

  initial begin
    int ndistinct;
    in_valid = 0; in_data = 0; out_ready = 0;
    foreach (class_seen[k]) class_seen[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      int nin, nout;
      x = new[H * W * 2];
      foreach (x[i]) x[i] = int'($urandom_range(0, 254)) - 127;
      e = net_ref(x, H, W);
      nin = 0; nout = 0;
      fork
        begin
          while (nin < H * W * 2) begin
            @(negedge clk);
            in_valid = (f == 0) || ($urandom_range(0, 3) != 0);
            in_data  = act_t'(x[nin]);
            #1;
            if (in_valid && in_ready) nin++;
          end
          @(negedge clk);
          in_valid = 0;
        end
        while (nout < H * W) begin
          @(negedge clk);
          out_ready = (f == 0) || ($urandom_range(0, 2) != 0);
          #1;
          if (out_valid && out_ready) begin
            checks++;
            class_seen[out_class]++;
            if (int'(out_class) != e[nout]) begin
              failures++;
              if (failures < 10) $display("frame %0d pixel %0d: got %0d exp %0d", f, nout,
                                          out_class, e[nout]);
            end
            nout++;
          end
        end
      join
      $display("scene %0d done at cycle-time %0t", f, $time);
    end
    ndistinct = 0;
    foreach (class_seen[k]) if (class_seen[k] != 0) ndistinct++;
    $display("mechanisms:");
    expect_event("input stalls", n_in_stall);
    expect_event("back-pressure between layers", n_internal_bp);
    expect_event("SIPO groups (layer 2)", n_sipo);
    expect_event("standard conv groups (layer 3)", n_std);
    expect_event("pooled words (pool0)", n_pool);
    expect_event("upsample row replays", n_up);
    expect_event("pointwise logits", n_logit);
    expect_event("output back-pressure", n_out_bp);
    expect_event("distinct classes beyond the first", ndistinct - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
