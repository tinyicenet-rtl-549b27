// tb_adder_tree -- checks the adder tree against a plain running sum for a
// power-of-two and a non-power-of-two number of addends, on extreme and
// random inputs.
module tb_adder_tree;
  logic signed [15:0] in1 [144];
  logic signed [31:0] s1;
  logic signed [15:0] in2 [7];
  logic signed [31:0] s2;
  int checks = 0, failures = 0;

  adder_tree #(.N(144), .IW(16), .OW(32)) dut1 (.in(in1), .sum(s1));
  adder_tree #(.N(7),   .IW(16), .OW(32)) dut2 (.in(in2), .sum(s2));

  initial begin
    for (int t = 0; t < 200; t++) begin
      int r1, r2;
      r1 = 0; r2 = 0;
      for (int i = 0; i < 144; i++) begin
        in1[i] = (t == 0) ? -16'sd32768 : (t == 1) ? 16'sd32767 : 16'($urandom);
        r1 += int'(in1[i]);
      end
      for (int i = 0; i < 7; i++) begin
        in2[i] = 16'($urandom);
        r2 += int'(in2[i]);
      end
      #1;
      checks += 2;
      if (s1 != r1) begin failures++; $display("N=144: got %0d exp %0d", s1, r1); end
      if (s2 != r2) begin failures++; $display("N=7: got %0d exp %0d", s2, r2); end
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
