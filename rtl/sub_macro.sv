// sub_macro: one FlexCiM sub-macro, an (X/P) x Y x 8 slice of the DCiM macro
// (32 rows x 32 columns x 8 bits = 8 Kb by default).
//
// Contents: Y memory columns (dcim_column), the column-wise controller and the PSum
// buffer. Row r of every column is fed by the distribution unit of row r, whose line
// arrives on ld_pair[r]; the global controller's ld_* command says which column and
// which rows capture it, and which i_sel bits go with them.
//
// Interface and timing:
//  * weight write: w_we writes w_data to (w_col, w_row) on the clock edge; r_data shows
//    the word at (r_col, r_row) combinationally (memory mode of the bit-cells).
//  * load: one row-pipeline stage per cycle (ld_valid). One cycle after the stage with
//    ld_last, the column starts its 8-cycle MAC; 8 cycles later psum_wr pulses with
//    psum_wr_col, and the result is written into the PSum buffer on that edge.
//  * rd_col / rd_psum: combinational read of the PSum buffer for the merging unit.
// Columns start on distinct cycles, so at most one finishes per cycle (asserted).
module sub_macro #(
  parameter int unsigned ROWS   = flexcim_pkg::X_ROWS / flexcim_pkg::P_PART,
  parameter int unsigned Y      = flexcim_pkg::Y_COLS,
  parameter int unsigned W      = flexcim_pkg::WORD_W,
  parameter int unsigned TREE_W = flexcim_pkg::TREE_W,
  parameter int unsigned PSUM_W = flexcim_pkg::TREE_W + flexcim_pkg::WORD_W - 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // memory mode
  input  logic                      w_we,
  input  logic [$clog2(Y)-1:0]      w_col,
  input  logic [$clog2(ROWS)-1:0]   w_row,
  input  logic [W-1:0]              w_data,
  input  logic [$clog2(Y)-1:0]      r_col,
  input  logic [$clog2(ROWS)-1:0]   r_row,
  output logic [W-1:0]              r_data,
  // iAct load from the distribution units / global controller
  input  logic                      ld_valid,
  input  logic [$clog2(Y)-1:0]      ld_col,
  input  logic                      ld_last,
  input  logic [ROWS-1:0]           ld_row_en,
  input  logic [ROWS-1:0]           ld_isel,
  input  logic [2*W-1:0]            ld_pair [ROWS],
  // partial sums
  output logic                      psum_wr,
  output logic [$clog2(Y)-1:0]      psum_wr_col,
  input  logic [$clog2(Y)-1:0]      rd_col,
  output logic signed [PSUM_W-1:0]  rd_psum
);

  logic [Y-1:0]              ld_col_oh;
  logic [Y-1:0]              en_col;
  logic [ROWS-1:0]           i_sel [Y];
  logic [Y-1:0]              start;
  logic [Y-1:0]              col_busy;
  logic [Y-1:0]              col_valid;
  logic signed [PSUM_W-1:0]  col_psum [Y];
  logic [W-1:0]              col_rdata [Y];
  logic signed [PSUM_W-1:0]  wr_data;

  column_controller #(.ROWS(ROWS), .Y(Y)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .ld_valid  (ld_valid),
    .ld_col    (ld_col),
    .ld_last   (ld_last),
    .ld_row_en (ld_row_en),
    .ld_isel   (ld_isel),
    .col_done  (col_valid),
    .ld_col_oh (ld_col_oh),
    .en_col    (en_col),
    .i_sel     (i_sel),
    .start     (start)
  );

  for (genvar c = 0; c < Y; c++) begin : g_col
    dcim_column #(.ROWS(ROWS), .W(W), .TREE_W(TREE_W), .PSUM_W(PSUM_W)) u_col (
      .clk        (clk),
      .rst_n      (rst_n),
      .wl         (w_we && (w_col == c)),
      .w_row      (w_row),
      .wdata      (w_data),
      .r_row      (r_row),
      .rdata      (col_rdata[c]),
      .ld_row_en  (ld_row_en & {ROWS{ld_col_oh[c]}}),
      .pair_in    (ld_pair),
      .en_col     (en_col[c]),
      .i_sel      (i_sel[c]),
      .start      (start[c]),
      .busy       (col_busy[c]),
      .psum_valid (col_valid[c]),
      .psum       (col_psum[c])
    );
  end

  assign r_data = col_rdata[r_col];

  // at most one column finishes per cycle: pick it
  always_comb begin
    psum_wr     = 1'b0;
    psum_wr_col = '0;
    wr_data     = '0;
    for (int c = 0; c < int'(Y); c++) begin
      if (col_valid[c]) begin
        psum_wr     = 1'b1;
        psum_wr_col = ($clog2(Y))'(c);
        wr_data     = col_psum[c];
      end
    end
  end

  psum_buffer #(.DEPTH(Y), .DW(PSUM_W)) u_pbuf (
    .clk     (clk),
    .wr_en   (psum_wr),
    .wr_addr (psum_wr_col),
    .wr_data (wr_data),
    .rd_addr (rd_col),
    .rd_data (rd_psum)
  );

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(col_valid));
  // weights must not be rewritten in a column that is computing
  assert property (@(posedge clk) disable iff (!rst_n) w_we |-> !col_busy[w_col]);

endmodule
