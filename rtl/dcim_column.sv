// dcim_column: one column of a FlexCiM sub-macro.
//
// The column holds ROWS (32) 8-bit memory words, the iAct serializer that feeds their
// bit-lines, a ROWS-input adder tree and the partial-sum accumulator. Weights are
// signed 8-bit values (own choice; the paper does not state the number format) and
// iActs are unsigned 8-bit values, matching PSum = sum_i 2^i * sum(iAct[i] * W).
//
// Operation:
//  * memory mode: wl = 1 writes wdata into row w_row; rdata always shows row r_row.
//  * iAct load: rows with ld_row_en high capture pair_in (one row-pipeline stage of
//    rows per cycle; the stages of a column arrive on consecutive cycles).
//  * compute: a one-cycle 'start' (given after the last stage has been loaded) begins
//    8 bit-serial cycles. In each of them every word multiplies the selected iAct bit
//    with its weight, the adder tree sums the 32 products and the accumulator
//    shifts-and-adds. psum_valid pulses one cycle after the 8th bit, i.e. 8 cycles
//    after 'start', with psum holding the column's partial sum.
// Own choice: the column begins its bit-serial MAC only after all of its rows have been
// loaded, so every row is at the same bit significance when the adder tree sums them.
module dcim_column #(
  parameter int unsigned ROWS   = flexcim_pkg::X_ROWS / flexcim_pkg::P_PART,
  parameter int unsigned W      = flexcim_pkg::WORD_W,
  parameter int unsigned TREE_W = flexcim_pkg::TREE_W,
  parameter int unsigned PSUM_W = flexcim_pkg::TREE_W + flexcim_pkg::WORD_W - 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // memory mode
  input  logic                      wl,
  input  logic [$clog2(ROWS)-1:0]   w_row,
  input  logic [W-1:0]              wdata,
  input  logic [$clog2(ROWS)-1:0]   r_row,
  output logic [W-1:0]              rdata,
  // iAct load (one row-pipeline stage)
  input  logic [ROWS-1:0]           ld_row_en,
  input  logic [2*W-1:0]            pair_in [ROWS],
  // control from the column controller
  input  logic                      en_col,
  input  logic [ROWS-1:0]           i_sel,
  input  logic                      start,
  // result
  output logic                      busy,
  output logic                      psum_valid,
  output logic signed [PSUM_W-1:0]  psum
);

  logic [ROWS-1:0]          bl, blb;
  logic [ROWS-1:0]          row_wl;
  logic [W-1:0]             row_rdata [ROWS];
  logic [W-1:0]             row_prod  [ROWS];
  logic signed [W-1:0]      tree_in   [ROWS];
  logic signed [TREE_W-1:0] tree_sum;
  logic                     active;
  logic [2:0]               bit_cnt;

  // bit-serial sequencing: 'start' is the MSB cycle, then 7 more cycles
  assign active = start || busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      bit_cnt <= '0;
    end else if (start) begin
      busy    <= 1'b1;
      bit_cnt <= 3'd1;
    end else if (busy) begin
      bit_cnt <= bit_cnt + 3'd1;
      if (bit_cnt == 3'd7) busy <= 1'b0;
    end
  end

  iact_serializer #(.ROWS(ROWS), .W(W)) u_ser (
    .clk     (clk),
    .load    (ld_row_en),
    .pair_in (pair_in),
    .shift   (active),
    .bl      (bl),
    .blb     (blb)
  );

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign row_wl[r] = wl && (w_row == r);
    dcim_word #(.W(W)) u_word (
      .clk    (clk),
      .wl     (row_wl[r]),
      .wdata  (wdata),
      .rdata  (row_rdata[r]),
      .en_col (en_col && active),
      .bl     (bl[r]),
      .blb    (blb[r]),
      .i_sel  (i_sel[r]),
      .prod   (row_prod[r])
    );
    assign tree_in[r] = row_prod[r];
  end

  assign rdata = row_rdata[r_row];

  adder_tree #(.N(ROWS), .IN_W(W), .OUT_W(TREE_W)) u_tree (
    .din (tree_in),
    .sum (tree_sum)
  );

  psum_accumulator #(.IN_W(TREE_W), .OUT_W(PSUM_W)) u_acc (
    .clk       (clk),
    .rst_n     (rst_n),
    .valid     (active),
    .first     (start),
    .last      (busy && bit_cnt == 3'd7),
    .din       (tree_sum),
    .out_valid (psum_valid),
    .psum      (psum)
  );

  // a new MAC must not start while the previous one is still running
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
