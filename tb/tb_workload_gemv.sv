// tb_workload_gemv: LLM decode-style matrix-vector products on the default-size
// accelerator. Each "layer" is a 32-output slice of a projection with K inputs
// (K = 4096, the hidden size of a 7B-class LLaMA model, or 2048), pruned to one N:M
// pattern; different layers use different patterns, as a layer-wise N:M assignment
// would. The slice is run as K / (128*M/N) weight-stationary passes: for every pass the
// bench writes that tile's non-zeros and metadata, writes the iAct lines, runs the pass
// and adds the 32 outputs into its own accumulators. The final sums are compared with a
// dense reference sum_k W[c][k] * x[k]; every pass must take Y*M/N + 13 cycles. Weights,
// iActs and non-zero positions are random: no real model data is used. The layer-wise
// choice of patterns and the GEMV view of a layer follow the published evaluation; the
// tiling into passes and the accumulation of passes in the bench are this design's own
// choices, since the macro itself keeps only one pass worth of partial sums.
module tb_workload_gemv;
  import flexcim_pkg::*;

  localparam int X = 128, Y = 32, P = 4, ROWS = X / P;
  localparam int OUT_W = 26;
  localparam int KMAX = 4096;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  nm_cfg_t    cfg;
  logic       start, busy, done, w_we, a_we, out_valid, o_valid;
  logic [1:0] w_sm;
  logic [4:0] w_col, w_row, out_col, o_addr;
  logic [7:0] w_data, r_data;
  logic [2:0] w_meta, a_addr;
  logic [7:0] a_data [X];
  logic signed [OUT_W-1:0] out_data, o_data;

  flexcim_top dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [7:0] wd [Y][KMAX];
  logic        [7:0] xv [KMAX];
  logic signed [7:0] mw [P][Y][ROWS];
  logic        [2:0] mm [P][Y][ROWS];
  longint            acc [Y];

  // fill the dense matrix with an N:M pattern: n random positions per block of m
  task automatic make_layer(input int k, input int n, input int m);
    int pos [8];
    for (int i = 0; i < k; i++) xv[i] = 8'($urandom);
    for (int c = 0; c < Y; c++) begin
      for (int i = 0; i < k; i++) wd[c][i] = 0;
      for (int b = 0; b < k / m; b++) begin
        for (int i = 0; i < 8; i++) pos[i] = i;
        for (int i = m - 1; i > 0; i--) begin
          int j, t; j = $urandom_range(i, 0); t = pos[i]; pos[i] = pos[j]; pos[j] = t;
        end
        for (int j = 0; j < n; j++) wd[c][b * m + pos[j]] = 8'($urandom);
      end
    end
  endtask

  // compress the tile starting at k0 into words + metadata (non-zeros in order;
  // an all-zero slot stays a zero weight)
  task automatic map_tile(input int k0, input int nl, input int ml);
    int n, m, s_cnt, rg, g_cnt;
    logic dense;
    dense = (nl == ml);
    n = dense ? 1 : (1 << nl); m = dense ? 1 : (1 << ml);
    s_cnt = dense ? 1 : (1 << (ml - nl)); rg = ROWS / s_cnt; g_cnt = P / n;
    for (int c = 0; c < Y; c++)
      for (int r = 0; r < ROWS; r++) begin
        int s, q;
        s = r / rg; q = r % rg;
        for (int g = 0; g < g_cnt; g++) begin
          int base, j;
          base = k0 + s * 128 + (q * g_cnt + g) * m;
          j = 0;
          for (int i = 0; i < m; i++)
            if (wd[c][base + i] != 0 && j < n) begin
              mw[g * n + j][c][r] = wd[c][base + i]; mm[g * n + j][c][r] = 3'(dense ? 0 : i); j++;
            end
          for (; j < n; j++) begin mw[g * n + j][c][r] = 0; mm[g * n + j][c][r] = 3'(j); end
        end
      end
  endtask

  task automatic run_layer(input int k, input int nl, input int ml);
    int s_cnt, kt, passes;
    longint t_compute, t_total, t_begin;
    s_cnt = (nl == ml) ? 1 : (1 << (ml - nl));
    kt = 128 * s_cnt;
    passes = k / kt;
    make_layer(k, (nl == ml) ? 1 : (1 << nl), (nl == ml) ? 1 : (1 << ml));
    for (int c = 0; c < Y; c++) acc[c] = 0;
    t_compute = 0;
    t_begin = cycle;
    for (int ps = 0; ps < passes; ps++) begin
      longint t0;
      map_tile(ps * kt, nl, ml);
      for (int p = 0; p < P; p++) for (int c = 0; c < Y; c++) for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        w_we = 1; w_sm = 2'(p); w_col = 5'(c); w_row = 5'(r); w_data = mw[p][c][r]; w_meta = mm[p][c][r];
      end
      @(negedge clk); w_we = 0;
      for (int s = 0; s < s_cnt; s++) begin
        @(negedge clk); a_we = 1; a_addr = 3'(s);
        for (int i = 0; i < X; i++) a_data[i] = xv[ps * kt + s * 128 + i];
      end
      @(negedge clk); a_we = 0;
      cfg = '{n_log2: 2'(nl), m_log2: 2'(ml)}; start = 1;
      @(posedge clk); t0 = cycle;
      @(negedge clk); start = 0;
      while (!done) begin
        @(posedge clk);
        if (out_valid) acc[out_col] += longint'(out_data);
      end
      t_compute += cycle - t0;
      checks++;
      if (cycle - t0 != longint'(Y * s_cnt + 13)) begin
        failures++; $display("pass latency %0d", cycle - t0);
      end
    end
    t_total = cycle - t_begin;
    for (int c = 0; c < Y; c++) begin
      longint e;
      e = 0;
      for (int i = 0; i < k; i++) e += longint'(wd[c][i]) * longint'(xv[i]);
      checks++;
      if (acc[c] != e) begin failures++; $display("layer %0d:%0d col %0d got %0d exp %0d", 1 << nl, 1 << ml, c, acc[c], e); end
    end
    $display("layer K=%0d N:M=%0d:%0d: %0d passes, %0d compute cycles, %0d cycles with weight loading",
             k, (nl == ml) ? 8 : 1 << nl, 1 << ml, passes, t_compute, t_total);
  endtask

  initial begin
    cfg = '0; start = 0; w_we = 0; w_sm = 0; w_col = 0; w_row = 0; w_data = 0; w_meta = 0;
    a_we = 0; a_addr = 0; o_addr = 0;
    for (int i = 0; i < X; i++) a_data[i] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run_layer(4096, 1, 2);   // 2:4
    run_layer(4096, 0, 3);   // 1:8
    run_layer(2048, 2, 3);   // 4:8
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
