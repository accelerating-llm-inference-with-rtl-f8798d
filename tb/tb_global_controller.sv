// tb_global_controller: writes random metadata, then runs passes in every N:M mode and
// checks, cycle by cycle, the iAct-buffer read sequence (line s for stage s, columns in
// order, M/N stages each), the aligned load command (column, last-stage flag, the rows
// of the stage, i_sel = metadata LSB, distribution select = upper bits, zero when dense),
// and that done follows the Y-th merged output by one cycle. An illegal N:M must not
// start a pass.
module tb_global_controller;
  import flexcim_pkg::*;
  localparam int ROWS = 32, Y = 32, P = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  nm_cfg_t cfg_in, cfg;
  logic start, busy, done, pass_start, m_we, ab_re, ld_valid, ld_last, mrg_valid;
  logic [1:0] m_sm;
  logic [4:0] m_col, m_row, ld_col;
  logic [2:0] m_data, ab_addr;
  logic [ROWS-1:0] ld_row_en;
  logic [ROWS-1:0] ld_isel [P];
  logic [1:0] dsel [ROWS][P];
  logic [2:0] meta [P][Y][ROWS];
  int checks = 0, failures = 0;

  global_controller dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int nl, input int ml);
    int s_cnt, rg, exp_c, exp_s, nissued, merged, t, dense;
    logic prev_re;
    int prev_s, prev_c;
    dense = (nl == ml);
    s_cnt = dense ? 1 : (1 << (ml - nl));
    rg = ROWS / s_cnt;
    @(negedge clk); cfg_in = '{n_log2: 2'(nl), m_log2: 2'(ml)}; start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (!busy || cfg !== cfg_in) begin failures++; $display("not started"); end
    exp_c = 0; exp_s = 0; nissued = 0; merged = 0; prev_re = 0; prev_s = 0; prev_c = 0;
    t = 0;
    while (!done && t < 2000) begin
      // load command of the previous cycle's read
      checks++;
      if (ld_valid !== prev_re) begin failures++; $display("ld_valid"); end
      if (prev_re) begin
        checks++;
        if (ld_col != 5'(prev_c) || ld_last != (prev_s == s_cnt - 1)) begin
          failures++; $display("ld col/last c%0d s%0d", prev_c, prev_s);
        end
        for (int r = 0; r < ROWS; r++) begin
          checks++;
          if (ld_row_en[r] != (r / rg == prev_s)) begin failures++; $display("row_en r%0d", r); end
          for (int p = 0; p < P; p++) begin
            logic [2:0] mt;
            mt = dense ? 3'd0 : meta[p][prev_c][r];
            checks++;
            if (ld_isel[p][r] != mt[0] || dsel[r][p] != mt[2:1]) begin
              failures++; $display("meta split p%0d c%0d r%0d", p, prev_c, r);
            end
          end
        end
      end
      prev_re = ab_re;
      if (ab_re) begin
        checks++;
        if (nissued >= Y * s_cnt || ab_addr != 3'(exp_s)) begin
          failures++; $display("read addr %0d exp %0d", ab_addr, exp_s);
        end
        prev_s = exp_s; prev_c = exp_c;
        nissued++;
        exp_s++;
        if (exp_s == s_cnt) begin exp_s = 0; exp_c++; end
      end
      // merged outputs: one every few cycles once the reads are done
      mrg_valid = (nissued == Y * s_cnt) && (t % 3 == 0) && merged < Y;
      if (mrg_valid) merged++;
      @(negedge clk);
      t++;
    end
    mrg_valid = 0;
    checks += 2;
    if (nissued != Y * s_cnt) begin failures++; $display("issued %0d", nissued); end
    if (merged != Y) begin failures++; $display("done after %0d merged", merged); end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy"); end
  endtask

  initial begin
    cfg_in = '0; start = 0; m_we = 0; m_sm = 0; m_col = 0; m_row = 0; m_data = 0; mrg_valid = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int p = 0; p < P; p++) for (int c = 0; c < Y; c++) for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); m_we = 1; m_sm = 2'(p); m_col = 5'(c); m_row = 5'(r);
      m_data = 3'($urandom); meta[p][c][r] = m_data;
    end
    @(negedge clk); m_we = 0;
    run(3, 3); run(0, 1); run(0, 2); run(1, 2); run(0, 3); run(1, 3); run(2, 3); run(1, 1);
    // illegal configuration (M = 1) is ignored
    @(negedge clk); cfg_in = '{n_log2: 2'd0, m_log2: 2'd0};
    checks++;
    if (pass_start) begin failures++; $display("illegal cfg accepted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
