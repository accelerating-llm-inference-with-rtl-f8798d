// dcim_word: one 8-bit memory word of a FlexCiM sub-macro column with its
// in-memory compute logic.
//
// The word holds eight bit-cells that share one word-line (WL) per column and two
// bit-lines per row. In memory mode (WL = 1) the word is written from wdata on the
// clock edge and is always readable on rdata. In compute mode (WL = 0 and EN_COL = 1)
// a 2:1 multiplexer, shared by the word and steered by i_sel, picks the iAct bit on BL
// (i_sel = 0) or on BLB (i_sel = 1), and every bit-store multiplies that bit with its
// stored weight bit. As in the paper the 1-bit multiplier is a NOR gate; here it is fed
// with the complements of the operands (the store's inverted storage node and the
// inverted iAct bit), which makes the NOR an AND. prod is combinational.
//
// Own choices: the bit-cells are modelled as edge-triggered storage rather than
// latches, and no reset is applied to the stored weight (weights are written before use).
module dcim_word #(
  parameter int unsigned W = flexcim_pkg::WORD_W
) (
  input  logic         clk,
  input  logic         wl,       // word-line: memory mode, write enable
  input  logic [W-1:0] wdata,
  output logic [W-1:0] rdata,
  input  logic         en_col,   // column compute enable
  input  logic         bl,       // iAct bit on BL
  input  logic         blb,      // iAct bit on the second bit-line
  input  logic         i_sel,    // 2:1 iAct select
  output logic [W-1:0] prod      // bit-serial partial products, one per bit-store
);

  logic [W-1:0] store;
  logic         act_bit;
  logic         act_n;
  logic [W-1:0] store_n;

  always_ff @(posedge clk) begin
    if (wl) store <= wdata;
  end

  assign rdata   = store;
  assign act_bit = i_sel ? blb : bl;
  // compute mode only when WL = 0 and EN_COL = 1
  assign act_n   = ~(act_bit & en_col & ~wl);
  assign store_n  = ~store;

  always_comb begin
    for (int i = 0; i < int'(W); i++) prod[i] = ~(act_n | store_n[i]);
  end

endmodule
