// iact_serializer: the iAct serializer of one sub-macro column.
//
// Every row of the column receives one 16-bit distribution-unit line, i.e. two 8-bit
// iActs: bits [7:0] are streamed on BL and bits [15:8] on the second bit-line (BLB).
// A row captures its line on the clock edge when load[r] is high (rows of one
// row-pipeline stage load together). While shift is high the row presents the MSBs of
// both iActs and shifts left by one bit per cycle, so after 8 shift cycles all bits have
// been streamed MSB first, as the paper specifies. bl/blb are the current MSBs
// (combinational from the registers).
//
// Own choice: the pair registers are not reset; a row is always loaded before use.
module iact_serializer #(
  parameter int unsigned ROWS = flexcim_pkg::X_ROWS / flexcim_pkg::P_PART,
  parameter int unsigned W    = flexcim_pkg::WORD_W
) (
  input  logic             clk,
  input  logic [ROWS-1:0]  load,
  input  logic [2*W-1:0]   pair_in [ROWS],
  input  logic             shift,
  output logic [ROWS-1:0]  bl,
  output logic [ROWS-1:0]  blb
);

  logic [W-1:0] act_a [ROWS];
  logic [W-1:0] act_b [ROWS];

  always_ff @(posedge clk) begin
    for (int r = 0; r < int'(ROWS); r++) begin
      if (load[r]) begin
        act_a[r] <= pair_in[r][W-1:0];
        act_b[r] <= pair_in[r][2*W-1:W];
      end else if (shift) begin
        act_a[r] <= act_a[r] << 1;
        act_b[r] <= act_b[r] << 1;
      end
    end
  end

  always_comb begin
    for (int r = 0; r < int'(ROWS); r++) begin
      bl[r]  = act_a[r][W-1];
      blb[r] = act_b[r][W-1];
    end
  end

endmodule
