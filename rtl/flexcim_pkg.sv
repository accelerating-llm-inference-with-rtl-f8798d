// flexcim_pkg: shared sizes, types and N:M configuration helpers for the FlexCiM
// digital compute-in-memory accelerator.
//
// The default sizes are the demonstrated configuration: an X x Y x 8 macro with
// X = 128 rows, Y = 32 columns and 8-bit words, partitioned into P = 4 sub-macros of
// 32 x 32 x 8 each. The local iAct buffer delivers X iActs (1024 bits) per cycle.
// The column adder-tree output width (17 bits) is the one printed in the column
// diagram; the accumulator and merged widths are derived from it (own choice).
//
// N:M configuration. N is coded as log2(N) in {0..3} (1, 2, 4, 8), M as log2(M) in
// {1..3} (2, 4, 8), with N <= M. N == M is dense operation. In sparse operation the
// number of row-pipeline stages needed to feed one column is M/N (1:8 -> 8, 1:4 -> 4,
// 1:2 -> 2, 4:8 -> 2, ...), and in dense operation it is 1. Dense operation is handled
// as if it were "1:1": every sub-macro row receives a single iAct on both bit-lines.
package flexcim_pkg;

  localparam int unsigned X_ROWS   = 128;  // macro rows (X)
  localparam int unsigned Y_COLS   = 32;   // macro columns (Y)
  localparam int unsigned P_PART   = 4;    // number of sub-macros (P)
  localparam int unsigned WORD_W   = 8;    // memory word / iAct width
  localparam int unsigned TREE_W   = 17;   // column adder-tree output width
  localparam int unsigned META_W   = 3;    // metadata bits per non-zero (M = 8)
  localparam int unsigned DSEL_W   = 2;    // distribution-unit select bits (META_W - 1)

  typedef struct packed {
    logic [1:0] n_log2;   // log2(N)
    logic [1:0] m_log2;   // log2(M)
  } nm_cfg_t;

  // Configuration is legal when M is 2, 4 or 8 and N <= M.
  function automatic logic cfg_legal(nm_cfg_t c);
    return (c.m_log2 != 2'd0) && (c.n_log2 <= c.m_log2);
  endfunction

  function automatic logic cfg_dense(nm_cfg_t c);
    return c.n_log2 == c.m_log2;
  endfunction

  // log2 of the number of row-pipeline stages: log2(M/N), 0 when dense.
  function automatic logic [1:0] stage_log2(nm_cfg_t c);
    return cfg_dense(c) ? 2'd0 : 2'(c.m_log2 - c.n_log2);
  endfunction

  // Effective N and M used for mapping. Dense operation behaves like 1:1.
  function automatic logic [1:0] n_eff_log2(nm_cfg_t c);
    return cfg_dense(c) ? 2'd0 : c.n_log2;
  endfunction

  function automatic logic [1:0] m_eff_log2(nm_cfg_t c);
    return cfg_dense(c) ? 2'd0 : c.m_log2;
  endfunction

endpackage
