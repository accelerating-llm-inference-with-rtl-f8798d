// merging_unit: sums the partial sums of one column across all P sub-macros.
//
// The sub-macros compute disjoint parts of the same output column (different blocks,
// or different non-zeros of the same block), so the final partial sum of column c is
// the sum of entry c of the P PSum buffers. The unit is a P-input adder tree.
//
// Timing (own choice): 'trig' with trig_col marks the cycle in which the sub-macros
// write column trig_col into their PSum buffers. The unit registers it, reads the
// buffers through rd_col in the next cycle (combinational read) and presents the
// registered sum on out_data with out_valid one cycle later, i.e. two cycles after trig.
module merging_unit #(
  parameter int unsigned P      = flexcim_pkg::P_PART,
  parameter int unsigned Y      = flexcim_pkg::Y_COLS,
  parameter int unsigned PSUM_W = flexcim_pkg::TREE_W + flexcim_pkg::WORD_W - 1,
  parameter int unsigned OUT_W  = PSUM_W + $clog2(P)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      trig,
  input  logic [$clog2(Y)-1:0]      trig_col,
  output logic [$clog2(Y)-1:0]      rd_col,
  input  logic signed [PSUM_W-1:0]  psum_in [P],
  output logic                      out_valid,
  output logic [$clog2(Y)-1:0]      out_col,
  output logic signed [OUT_W-1:0]   out_data
);

  logic                    rd_valid;
  logic signed [OUT_W-1:0] sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid  <= 1'b0;
      rd_col    <= '0;
      out_valid <= 1'b0;
      out_col   <= '0;
      out_data  <= '0;
    end else begin
      rd_valid  <= trig;
      if (trig) rd_col <= trig_col;
      out_valid <= rd_valid;
      if (rd_valid) begin
        out_col  <= rd_col;
        out_data <= sum;
      end
    end
  end

  adder_tree #(.N(P), .IN_W(PSUM_W), .OUT_W(OUT_W)) u_tree (
    .din (psum_in),
    .sum (sum)
  );

endmodule
