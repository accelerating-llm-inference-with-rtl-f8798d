// column_controller: the column-wise controller of one sub-macro.
//
// It turns the load commands of the global controller into per-column control:
//  * ld_col_oh: which column's serializer captures the current row-pipeline stage;
//  * i_sel[c][r]: the 2:1 iAct select of every word, captured from the metadata LSBs
//    of the rows being loaded;
//  * en_col[c] (EN_COL): raised when column c starts to receive iActs and held until its
//    bit-serial MAC has finished (col_done[c]); several columns can be enabled at once
//    because a column keeps computing while the next columns are being fed;
//  * start[c]: one cycle after the last stage of column c has been loaded, starts that
//    column's 8-cycle MAC.
// Own choice: the i_sel bits are stored here (one per word), the paper only says the
// controller generates them. Dense operation sends i_sel = 0 (don't-care).
module column_controller #(
  parameter int unsigned ROWS = flexcim_pkg::X_ROWS / flexcim_pkg::P_PART,
  parameter int unsigned Y    = flexcim_pkg::Y_COLS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    ld_valid,
  input  logic [$clog2(Y)-1:0]    ld_col,
  input  logic                    ld_last,
  input  logic [ROWS-1:0]         ld_row_en,
  input  logic [ROWS-1:0]         ld_isel,
  input  logic [Y-1:0]            col_done,
  output logic [Y-1:0]            ld_col_oh,
  output logic [Y-1:0]            en_col,
  output logic [ROWS-1:0]         i_sel [Y],
  output logic [Y-1:0]            start
);

  always_comb begin
    ld_col_oh = '0;
    if (ld_valid) ld_col_oh[ld_col] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_col <= '0;
      start  <= '0;
      for (int c = 0; c < int'(Y); c++) i_sel[c] <= '0;
    end else begin
      start <= ld_col_oh & {Y{ld_last}};
      en_col <= (en_col | ld_col_oh) & ~col_done;
      for (int c = 0; c < int'(Y); c++) begin
        for (int r = 0; r < int'(ROWS); r++) begin
          if (ld_col_oh[c] && ld_row_en[r]) i_sel[c][r] <= ld_isel[r];
        end
      end
    end
  end

endmodule
