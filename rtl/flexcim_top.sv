// flexcim_top: the FlexCiM accelerator, a digital compute-in-memory (DCiM) macro that
// runs weight-sparse GEMV/GEMM with a per-layer choice of N:M sparsity
// (N:M in {1:2, 1:4, 2:4, 1:8, 2:8, 4:8} and dense).
//
// Structure: the X x Y x 8 macro is split into P sub-macros of X/P rows. All P
// sub-macros hold different non-zero weights of the same Y output columns. Row r of
// every sub-macro is fed by distribution unit r (X/P units), which picks, from the
// current 128-iAct line of the iAct buffer, the two iActs each sub-macro row needs. Each
// memory word then picks one of the two with its 2:1 mux. The global controller holds
// the metadata and sequences the row/column pipeline. The merging unit adds the P
// sub-macro partial sums of each column and the results go to the output buffer.
//
// Use (all host ports are synchronous to clk):
//  1. write the compressed weights (w_we) and their metadata (same cycle: the weight
//     goes to sub-macro w_sm, column w_col, row w_row; w_meta is the position of that
//     non-zero inside its block of M);
//  2. write the iAct lines (a_we, a_addr, a_data: 128 iActs per line; stage s of a pass
//     reads line s, so a pass covers 128 * M/N iActs);
//  3. pulse start with cfg; each merged column appears on out_valid/out_col/out_data
//     and is kept in the output buffer (o_addr -> o_data, o_valid); done pulses at the
//     end, Y*M/N + 13 cycles after the start cycle (Y + 13 when dense).
// The weight of (sub-macro p, column c, row r) multiplies iAct
//   s*128 + (q*(P/N) + p/N)*M + meta     with s = r / RG, q = r mod RG, RG = (X/P)/(M/N),
// and iAct s*128 + q*P + p in dense operation; column c's output is the sum over all
// words of column c. The level-2 shared SRAM that would fill the weight and iAct ports is
// not part of this design; its data enter through those ports.
module flexcim_top #(
  parameter int unsigned X          = flexcim_pkg::X_ROWS,
  parameter int unsigned Y          = flexcim_pkg::Y_COLS,
  parameter int unsigned P          = flexcim_pkg::P_PART,
  parameter int unsigned W          = flexcim_pkg::WORD_W,
  parameter int unsigned TREE_W     = flexcim_pkg::TREE_W,
  parameter int unsigned IACT_DEPTH = 8,
  parameter int unsigned PSUM_W     = TREE_W + W - 1,
  parameter int unsigned OUT_W      = PSUM_W + $clog2(P)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // control
  input  flexcim_pkg::nm_cfg_t            cfg,
  input  logic                            start,
  output logic                            busy,
  output logic                            done,
  // weight + metadata write, weight read (memory mode)
  input  logic                            w_we,
  input  logic [$clog2(P)-1:0]            w_sm,
  input  logic [$clog2(Y)-1:0]            w_col,
  input  logic [$clog2(X/P)-1:0]          w_row,
  input  logic [W-1:0]                    w_data,
  input  logic [flexcim_pkg::META_W-1:0]  w_meta,
  output logic [W-1:0]                    r_data,   // word at (w_sm, w_col, w_row)
  // iAct buffer write
  input  logic                            a_we,
  input  logic [$clog2(IACT_DEPTH)-1:0]   a_addr,
  input  logic [W-1:0]                    a_data [X],
  // results
  output logic                            out_valid,
  output logic [$clog2(Y)-1:0]            out_col,
  output logic signed [OUT_W-1:0]         out_data,
  input  logic [$clog2(Y)-1:0]            o_addr,
  output logic signed [OUT_W-1:0]         o_data,
  output logic                            o_valid
);
  import flexcim_pkg::*;

  localparam int unsigned ROWS = X / P;

  nm_cfg_t                  cfg_q;
  logic                     pass_start;
  logic                     ab_re;
  logic [$clog2(IACT_DEPTH)-1:0] ab_addr;
  logic [W-1:0]             line [X];
  logic                     ld_valid, ld_last;
  logic [$clog2(Y)-1:0]     ld_col;
  logic [ROWS-1:0]          ld_row_en;
  logic [ROWS-1:0]          ld_isel [P];
  logic [DSEL_W-1:0]        dsel [ROWS][P];
  logic [2*W-1:0]           du_pair [ROWS][P];   // [row][sub-macro]
  logic [2*W-1:0]           sm_pair [P][ROWS];   // [sub-macro][row]
  logic [P-1:0]             psum_wr;
  logic [$clog2(Y)-1:0]     psum_wr_col [P];
  logic [$clog2(Y)-1:0]     mrg_rd_col;
  logic signed [PSUM_W-1:0] sm_psum [P];
  logic [W-1:0]             sm_rdata [P];

  global_controller #(.ROWS(ROWS), .Y(Y), .P(P), .DEPTH(IACT_DEPTH)) u_gctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .cfg_in     (cfg),
    .start      (start),
    .busy       (busy),
    .done       (done),
    .pass_start (pass_start),
    .cfg        (cfg_q),
    .m_we       (w_we),
    .m_sm       (w_sm),
    .m_col      (w_col),
    .m_row      (w_row),
    .m_data     (w_meta),
    .ab_re      (ab_re),
    .ab_addr    (ab_addr),
    .ld_valid   (ld_valid),
    .ld_col     (ld_col),
    .ld_last    (ld_last),
    .ld_row_en  (ld_row_en),
    .ld_isel    (ld_isel),
    .dsel       (dsel),
    .mrg_valid  (out_valid)
  );

  iact_buffer #(.X(X), .W(W), .DEPTH(IACT_DEPTH)) u_abuf (
    .clk     (clk),
    .wr_en   (a_we),
    .wr_addr (a_addr),
    .wr_data (a_data),
    .rd_en   (ab_re),
    .rd_addr (ab_addr),
    .rd_data (line)
  );

  for (genvar r = 0; r < ROWS; r++) begin : g_du
    distribution_unit #(.ROW(r), .X(X), .P(P), .W(W)) u_du (
      .cfg  (cfg_q),
      .line (line),
      .dsel (dsel[r]),
      .pair (du_pair[r])
    );
    for (genvar p = 0; p < P; p++) begin : g_t
      assign sm_pair[p][r] = du_pair[r][p];
    end
  end

  for (genvar p = 0; p < P; p++) begin : g_sm
    sub_macro #(.ROWS(ROWS), .Y(Y), .W(W), .TREE_W(TREE_W), .PSUM_W(PSUM_W)) u_sm (
      .clk         (clk),
      .rst_n       (rst_n),
      .w_we        (w_we && (w_sm == p)),
      .w_col       (w_col),
      .w_row       (w_row),
      .w_data      (w_data),
      .r_col       (w_col),
      .r_row       (w_row),
      .r_data      (sm_rdata[p]),
      .ld_valid    (ld_valid),
      .ld_col      (ld_col),
      .ld_last     (ld_last),
      .ld_row_en   (ld_row_en),
      .ld_isel     (ld_isel[p]),
      .ld_pair     (sm_pair[p]),
      .psum_wr     (psum_wr[p]),
      .psum_wr_col (psum_wr_col[p]),
      .rd_col      (mrg_rd_col),
      .rd_psum     (sm_psum[p])
    );
  end

  assign r_data = sm_rdata[w_sm];

  merging_unit #(.P(P), .Y(Y), .PSUM_W(PSUM_W), .OUT_W(OUT_W)) u_merge (
    .clk       (clk),
    .rst_n     (rst_n),
    .trig      (psum_wr[0]),
    .trig_col  (psum_wr_col[0]),
    .rd_col    (mrg_rd_col),
    .psum_in   (sm_psum),
    .out_valid (out_valid),
    .out_col   (out_col),
    .out_data  (out_data)
  );

  output_buffer #(.DEPTH(Y), .DW(OUT_W)) u_obuf (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (pass_start),
    .wr_en    (out_valid),
    .wr_addr  (out_col),
    .wr_data  (out_data),
    .rd_addr  (o_addr),
    .rd_data  (o_data),
    .rd_valid (o_valid)
  );

  // the sub-macros run in lock-step
  for (genvar p = 1; p < P; p++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      psum_wr[p] == psum_wr[0] && (!psum_wr[0] || psum_wr_col[p] == psum_wr_col[0]));
  end

  initial begin
    assert (P >= 4) else $error("flexcim_top: M = 8 needs P >= 4 multiplexer inputs");
    assert (X == P * ROWS) else $error("flexcim_top: X must be a multiple of P");
  end

endmodule
