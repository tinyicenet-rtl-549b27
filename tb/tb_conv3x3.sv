// tb_conv3x3 -- self-checking test of the streaming 3x3 convolution in its
// standard form (UF_OUT = 1, UF_IN = CIN), a standard form with partial
// input unrolling (two input groups), and the SIPO form (UF_OUT = 2).
// Each instance runs one full-speed frame (cadence and cycle count
// checked) and one frame with random stalls on both sides.
module tb_conv3x3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic d0, d1, d2;
  int c0, c1, c2, f0, f1, f2, checks, failures;

  conv3x3_harness #(.CIN(4), .COUT(4), .H(5), .W(6), .UF_IN(4), .UF_OUT(1), .LAYER(3)) h_std
    (.clk, .rst_n, .done(d0), .checks(c0), .failures(f0));
  conv3x3_harness #(.CIN(8), .COUT(4), .H(4), .W(7), .UF_IN(4), .UF_OUT(1), .LAYER(4)) h_grp
    (.clk, .rst_n, .done(d1), .checks(c1), .failures(f1));
  conv3x3_harness #(.CIN(4), .COUT(8), .H(6), .W(5), .UF_IN(2), .UF_OUT(2), .LAYER(2)) h_sipo
    (.clk, .rst_n, .done(d2), .checks(c2), .failures(f2));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d0 && d1 && d2);
    checks = c0 + c1 + c2;
    failures = f0 + f1 + f2;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end
endmodule
