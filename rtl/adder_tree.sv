// adder_tree: a pairwise, purely combinational signed adder tree.
//
// N inputs of IN_W bits are added in log2(N) levels; every level widens the operands by
// one bit (8b + 8b -> 9b at the first level of the 32-input column tree, as in the
// column diagram), and the final sum is sign-extended to OUT_W bits. The column tree of
// a sub-macro uses N = 32, IN_W = 8, OUT_W = 17; the merging unit uses N = P.
// N must be a power of two and OUT_W >= IN_W + log2(N).
module adder_tree #(
  parameter int unsigned N     = 32,
  parameter int unsigned IN_W  = 8,
  parameter int unsigned OUT_W = 17
) (
  input  logic signed [IN_W-1:0]  din [N],
  output logic signed [OUT_W-1:0] sum
);

  localparam int unsigned LEVELS = $clog2(N);

  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    logic signed [IN_W+l-1:0] s [N >> l];
    if (l == 0) begin : g_in
      for (genvar i = 0; i < N; i++) begin : g_i
        assign s[i] = din[i];
      end
    end else begin : g_add
      for (genvar i = 0; i < (N >> l); i++) begin : g_i
        assign s[i] = (IN_W+l)'(g_lvl[l-1].s[2*i]) + (IN_W+l)'(g_lvl[l-1].s[2*i+1]);
      end
    end
  end

  assign sum = OUT_W'(g_lvl[LEVELS].s[0]);

  initial begin
    assert ((1 << LEVELS) == N) else $error("adder_tree: N must be a power of two");
    assert (OUT_W >= IN_W + LEVELS) else $error("adder_tree: OUT_W too small");
  end

endmodule
