// adder_tree -- sums N signed addends with a balanced binary tree.
//
// The addends are placed at the leaves of a tree padded to the next power
// of two (missing leaves are zero); each level adds neighbouring pairs of
// the level below, giving ceil(log2 N) adder levels.  Purely combinational; the
// parent decides where to register.  Addends are sign-extended from IW to
// OW bits before the first level, so OW must cover IW + log2(N) bits.
module adder_tree #(
  parameter int N  = 144,
  parameter int IW = 16,
  parameter int OW = 32
) (
  input  logic signed [IW-1:0] in [N],
  output logic signed [OW-1:0] sum
);
  localparam int LEVELS = (N > 1) ? $clog2(N) : 1;
  localparam int NP     = 1 << LEVELS;

  // level 0 holds the NP (zero-padded) leaves, level l holds NP >> l sums
  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int NL = NP >> l;
    logic signed [OW-1:0] v [NL];
    for (genvar i = 0; i < NL; i++) begin : g_node
      if (l == 0) begin : g_leaf
        if (i < N) begin : g_in
          assign v[i] = OW'(in[i]);
        end else begin : g_pad
          assign v[i] = '0;
        end
      end else begin : g_add
        assign v[i] = g_lvl[l-1].v[2*i] + g_lvl[l-1].v[2*i+1];
      end
    end
  end

  assign sum = g_lvl[LEVELS].v[0];
endmodule
