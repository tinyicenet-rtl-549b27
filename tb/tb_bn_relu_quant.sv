// tb_bn_relu_quant -- checks folded BN + ReLU + requantisation: negative
// results clamp to 0 (ReLU), large ones saturate at 127, and in-range
// values equal floor((acc*scale + bias) / 2^shift).
module tb_bn_relu_quant;
  import tinyicenet_pkg::*;
  acc_t acc;
  logic [7:0] scale;
  logic signed [23:0] bias;
  logic [4:0] shift;
  act_t y;
  int checks = 0, failures = 0, n_relu = 0, n_sat = 0, n_mid = 0;

  bn_relu_quant dut (.acc, .scale, .bias, .shift, .y);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      longint v, e;
      acc   = acc_t'(int'($urandom_range(0, 400000)) - 200000);
      scale = 8'($urandom_range(1, 255));
      bias  = 24'(int'($urandom_range(0, 200000)) - 100000);
      shift = 5'($urandom_range(6, 16));
      #1;
      v = longint'(acc) * longint'(scale) + longint'(bias);
      // floor division by 2^shift, independent of the >>> operator
      e = (v >= 0) ? v / (64'sd1 << shift) : -((-v + (64'sd1 << shift) - 1) / (64'sd1 << shift));
      if (e < 0) begin e = 0; n_relu++; end
      else if (e > 127) begin e = 127; n_sat++; end
      else n_mid++;
      checks++;
      if (int'(y) != int'(e)) begin
        failures++;
        if (failures < 10) $display("acc=%0d scale=%0d bias=%0d shift=%0d: got %0d exp %0d",
                                    acc, scale, bias, shift, y, e);
      end
    end
    checks++;
    if (n_relu == 0 || n_sat == 0 || n_mid == 0) failures++;
    $display("relu %0d, saturate %0d, in range %0d", n_relu, n_sat, n_mid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
