// tb_mult_array -- checks the 9 parallel int8 multipliers on the corner
// cases (+-127, -128, 0) and on random operands.
module tb_mult_array;
  import tinyicenet_pkg::*;
  act_t a [9];
  wgt_t w [9];
  prod_t p [9];
  int checks = 0, failures = 0;
  mult_array #(.N(9)) dut (.a, .w, .p);

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int k = 0; k < 9; k++) begin
        int va, vw;
        if (t < 4) begin
          va = (t[0]) ? -128 : 127;
          vw = (t[1]) ? -128 : 127;
        end else begin
          va = int'($urandom_range(0, 255)) - 128;
          vw = int'($urandom_range(0, 255)) - 128;
        end
        a[k] = act_t'(va);
        w[k] = wgt_t'(vw);
      end
      #1;
      for (int k = 0; k < 9; k++) begin
        checks++;
        if (int'(p[k]) != int'(a[k]) * int'(w[k])) begin
          failures++;
          $display("product %0d: %0d * %0d gave %0d", k, a[k], w[k], p[k]);
        end
      end
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
