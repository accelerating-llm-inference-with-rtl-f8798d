// tb_flexcim_top: end-to-end test of the FlexCiM accelerator at its default size
// (128 x 32 x 8 macro, 4 sub-macros, 32 distribution units).
//
// For every supported N:M pattern (dense, 1:2, 1:4, 2:4, 1:8, 2:8, 4:8) and two random
// data sets per pattern, the bench builds a dense weight matrix W[c][k] that obeys the
// pattern (at most N non-zeros, at random positions, in every block of M), compresses
// it into the memory words plus metadata, writes the iAct lines and runs one pass.
// Each of the 32 outputs is compared with sum_k W[c][k] * x[k] computed directly from the
// dense matrix; the output buffer and a weight read-back are checked as well, and the
// start-to-done time must be Y*M/N + 13 cycles.
// Mechanisms counted (each must occur): every N:M mode, multi-stage row pipelining,
// columns computing concurrently (column pipelining), distribution-unit selection of a
// non-first line, 2:1 selection of the second bit-line, memory-mode read-back.
module tb_flexcim_top;
  import flexcim_pkg::*;

  localparam int X = 128, Y = 32, P = 4, ROWS = X / P, W = 8;
  localparam int OUT_W = 17 + 7 + 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  nm_cfg_t          cfg;
  logic             start, busy, done;
  logic             w_we;
  logic [1:0]       w_sm;
  logic [4:0]       w_col, w_row;
  logic [7:0]       w_data;
  logic [2:0]       w_meta;
  logic [7:0]       r_data;
  logic             a_we;
  logic [2:0]       a_addr;
  logic [7:0]       a_data [X];
  logic             out_valid;
  logic [4:0]       out_col;
  logic signed [OUT_W-1:0] out_data, o_data;
  logic [4:0]       o_addr;
  logic             o_valid;

  flexcim_top dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_mode [7];
  int n_rowpipe = 0, n_colpipe = 0, n_dsel = 0, n_isel2 = 0, n_readback = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if ($countones(dut.g_sm[0].u_sm.en_col) > 1) n_colpipe++;
      if (dut.ld_valid && dut.u_gctrl.ld_stage != 0) n_rowpipe++;
      for (int r = 0; r < ROWS; r++)
        for (int p = 0; p < P; p++)
          if (dut.ld_valid && dut.ld_row_en[r] && dut.dsel[r][p] != 0) n_dsel++;
      for (int p = 0; p < P; p++)
        if (dut.ld_valid && (dut.ld_row_en & dut.ld_isel[p]) != 0) n_isel2++;
    end
  end

  // test data
  logic signed [7:0] wd [Y][1024];   // dense weights W[c][k]
  logic        [7:0] xv [1024];      // iActs x[k]
  logic signed [7:0] mw [P][Y][ROWS];
  logic        [2:0] mm [P][Y][ROWS];

  task automatic build(input int nl, input int ml);
    int s_cnt, rg, g_cnt, n, m, kk;
    logic dense;
    int pos [8];
    dense = (nl == ml);
    n = dense ? 1 : (1 << nl);
    m = dense ? 1 : (1 << ml);
    s_cnt = dense ? 1 : (1 << (ml - nl));
    rg = ROWS / s_cnt;
    g_cnt = P / n;
    for (int c = 0; c < Y; c++) for (int k = 0; k < 1024; k++) wd[c][k] = 0;
    for (int k = 0; k < 1024; k++) xv[k] = 8'($urandom);
    for (int c = 0; c < Y; c++) begin
      for (int r = 0; r < ROWS; r++) begin
        int s, q;
        s = r / rg; q = r % rg;
        for (int g = 0; g < g_cnt; g++) begin
          int base;
          base = s * 128 + (q * g_cnt + g) * m;
          // choose n distinct positions in the block of m, ascending
          for (int i = 0; i < 8; i++) pos[i] = i;
          for (int i = m - 1; i > 0; i--) begin
            int j, t;
            j = $urandom_range(i, 0); t = pos[i]; pos[i] = pos[j]; pos[j] = t;
          end
          for (int a = 0; a < n; a++) for (int b = a + 1; b < n; b++)
            if (pos[b] < pos[a]) begin int t; t = pos[a]; pos[a] = pos[b]; pos[b] = t; end
          for (int j = 0; j < n; j++) begin
            logic signed [7:0] v;
            v = 8'($urandom);
            kk = base + pos[j];
            wd[c][kk] = v;
            mw[g * n + j][c][r] = v;
            mm[g * n + j][c][r] = dense ? 3'd0 : 3'(pos[j]);
          end
        end
      end
    end
  endtask

  task automatic load_all(input int s_cnt);
    for (int p = 0; p < P; p++)
      for (int c = 0; c < Y; c++)
        for (int r = 0; r < ROWS; r++) begin
          @(negedge clk);
          w_we = 1; w_sm = 2'(p); w_col = 5'(c); w_row = 5'(r);
          w_data = mw[p][c][r]; w_meta = mm[p][c][r];
        end
    @(negedge clk); w_we = 0;
    for (int s = 0; s < s_cnt; s++) begin
      @(negedge clk);
      a_we = 1; a_addr = 3'(s);
      for (int i = 0; i < X; i++) a_data[i] = xv[s * 128 + i];
    end
    @(negedge clk); a_we = 0;
  endtask

  task automatic run_pass(input int nl, input int ml, input int mode_idx);
    int s_cnt, got;
    longint t0, t1;
    longint expv [Y];
    logic seen [Y];
    s_cnt = (nl == ml) ? 1 : (1 << (ml - nl));
    build(nl, ml);
    load_all(s_cnt);
    // weight read-back in memory mode
    for (int i = 0; i < 4; i++) begin
      int p, c, r;
      p = $urandom_range(P - 1); c = $urandom_range(Y - 1); r = $urandom_range(ROWS - 1);
      @(negedge clk); w_sm = 2'(p); w_col = 5'(c); w_row = 5'(r);
      #1; checks++; n_readback++;
      if (r_data !== mw[p][c][r]) begin
        failures++; $display("readback mismatch p%0d c%0d r%0d", p, c, r);
      end
    end
    for (int c = 0; c < Y; c++) begin
      expv[c] = 0; seen[c] = 0;
      for (int k = 0; k < 128 * s_cnt; k++) expv[c] += longint'(wd[c][k]) * longint'(xv[k]);
    end
    @(negedge clk);
    cfg = '{n_log2: 2'(nl), m_log2: 2'(ml)};
    start = 1;
    @(posedge clk); t0 = cycle;
    @(negedge clk); start = 0;
    got = 0;
    while (!done) begin
      @(posedge clk);
      if (out_valid) begin
        got++;
        checks++;
        if (seen[out_col] || longint'(out_data) != expv[out_col]) begin
          failures++;
          $display("N:M %0d:%0d col %0d got %0d exp %0d", 1 << nl, 1 << ml, out_col, out_data, expv[out_col]);
        end
        seen[out_col] = 1;
      end
    end
    t1 = cycle;
    checks++;
    if (got != Y) begin failures++; $display("got %0d outputs", got); end
    checks++;
    if (t1 - t0 != longint'(Y * s_cnt + 13)) begin
      failures++; $display("latency %0d, expected %0d", t1 - t0, Y * s_cnt + 13);
    end
    // output buffer
    for (int c = 0; c < Y; c++) begin
      @(negedge clk); o_addr = 5'(c); #1;
      checks++;
      if (!o_valid || longint'(o_data) != expv[c]) begin
        failures++; $display("output buffer col %0d", c);
      end
    end
    n_mode[mode_idx]++;
    $display("N:M %0d:%0d pass done, %0d cycles", 1 << nl, 1 << ml, t1 - t0);
  endtask

  initial begin
    cfg = '0; start = 0; w_we = 0; w_sm = 0; w_col = 0; w_row = 0; w_data = 0; w_meta = 0;
    a_we = 0; a_addr = 0; o_addr = 0;
    for (int i = 0; i < X; i++) a_data[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      run_pass(3, 3, 0);   // 8:8 dense
      run_pass(0, 1, 1);   // 1:2
      run_pass(0, 2, 2);   // 1:4
      run_pass(1, 2, 3);   // 2:4
      run_pass(0, 3, 4);   // 1:8
      run_pass(1, 3, 5);   // 2:8
      run_pass(2, 3, 6);   // 4:8
    end
    for (int i = 0; i < 7; i++) begin
      checks++; if (n_mode[i] == 0) begin failures++; $display("mode %0d never ran", i); end
    end
    checks++; if (n_rowpipe == 0) begin failures++; $display("no row pipelining"); end
    checks++; if (n_colpipe == 0) begin failures++; $display("no column overlap"); end
    checks++; if (n_dsel == 0) begin failures++; $display("no distribution select"); end
    checks++; if (n_isel2 == 0) begin failures++; $display("no second bit-line select"); end
    checks++; if (n_readback == 0) begin failures++; $display("no read-back"); end
    $display("mechanisms: rowpipe=%0d colpipe=%0d dsel=%0d isel=%0d readback=%0d",
             n_rowpipe, n_colpipe, n_dsel, n_isel2, n_readback);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
