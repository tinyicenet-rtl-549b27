// argmax -- turns N_CLASSES class logits per pixel into the class index.
//
// Input: a stream of logits, N_CLASSES consecutive beats per pixel.  Output:
// one class index per pixel, the index of the largest logit; on a tie the
// lower index wins (first maximum, as in common framework argmax).  A
// running maximum and its index are kept; the result is registered when
// the last logit of a pixel arrives, so it appears one cycle later.
module argmax
  import tinyicenet_pkg::*;
#(
  parameter int N_CLASSES = 7
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  logit_t          in_data,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [CLSW-1:0] out_class
);
  logit_t          best;
  logic [CLSW-1:0] bidx, cnt;

  assign in_ready = !out_valid || out_ready;
  wire in_fire = in_valid && in_ready;
  wire better  = (cnt == '0) || (in_data > best);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      best <= '0; bidx <= '0; cnt <= '0;
      out_valid <= 1'b0; out_class <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_fire) begin
        if (int'(cnt) == N_CLASSES - 1) begin
          cnt       <= '0;
          out_class <= better ? cnt : bidx;
          out_valid <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
          if (better) begin
            best <= in_data;
            bidx <= cnt;
          end
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_class));
endmodule
