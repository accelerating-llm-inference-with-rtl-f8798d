// psum_accumulator: shift-and-add accumulator of one sub-macro column.
//
// The column adder tree delivers one sum per streamed iAct bit, MSB first. The
// accumulator forms PSum = sum_i 2^i * tree_i: on each valid cycle it doubles the running
// value and adds the new tree output; 'first' restarts the sum (the running value is
// taken as zero) and 'last' marks the LSB. One cycle after the 'last' input, out_valid
// pulses and psum holds the finished partial sum; psum keeps that value until the next
// result. Width: OUT_W = IN_W + 7 for 8-bit iActs (17 + 7 = 24 by default, own choice).
module psum_accumulator #(
  parameter int unsigned IN_W  = flexcim_pkg::TREE_W,
  parameter int unsigned OUT_W = flexcim_pkg::TREE_W + flexcim_pkg::WORD_W - 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid,
  input  logic                    first,
  input  logic                    last,
  input  logic signed [IN_W-1:0]  din,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] psum
);

  logic signed [OUT_W-1:0] acc;
  logic signed [OUT_W-1:0] acc_next;

  assign acc_next = (first ? OUT_W'(0) : (acc <<< 1)) + OUT_W'(din);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      psum      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= valid && last;
      if (valid) acc <= acc_next;
      if (valid && last) psum <= acc_next;
    end
  end

endmodule
