// tb_sub_macro: a full-size sub-macro (32 x 32 x 8). Random weights are written to all
// columns; the bench then plays the global controller's role for a 1:2-style pass
// (2 stages per column, random pairs and i_sel per column) and checks that each
// column's partial sum is written to the PSum buffer (psum_wr, psum_wr_col) exactly
// 9 cycles after its last stage, and that the buffer holds the right values.
module tb_sub_macro;
  localparam int ROWS = 32, Y = 32, S = 2, RG = ROWS / S;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_we, ld_valid, ld_last, psum_wr;
  logic [4:0] w_col, w_row, r_col, r_row, ld_col, psum_wr_col, rd_col;
  logic [7:0] w_data, r_data;
  logic [ROWS-1:0] ld_row_en, ld_isel;
  logic [15:0] ld_pair [ROWS];
  logic signed [23:0] rd_psum;
  logic signed [7:0] wv [Y][ROWS];
  longint expv [Y];
  int last_t [Y];
  int checks = 0, failures = 0, cyc = 0, nwr = 0;

  sub_macro dut (.*);
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && psum_wr) begin
    nwr++;
    checks++;
    if (cyc - last_t[psum_wr_col] != 9) begin
      failures++; $display("col %0d written after %0d cycles", psum_wr_col, cyc - last_t[psum_wr_col]);
    end
  end

  initial begin
    w_we = 0; ld_valid = 0; ld_last = 0; w_col = 0; w_row = 0; r_col = 0; r_row = 0;
    ld_col = 0; rd_col = 0; w_data = 0; ld_row_en = 0; ld_isel = 0;
    for (int r = 0; r < ROWS; r++) ld_pair[r] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      for (int c = 0; c < Y; c++) for (int r = 0; r < ROWS; r++) begin
        @(negedge clk); w_we = 1; w_col = 5'(c); w_row = 5'(r);
        wv[c][r] = 8'($urandom); w_data = wv[c][r];
      end
      @(negedge clk); w_we = 0;
      for (int t = 0; t < 8; t++) begin
        int c, r;
        c = $urandom_range(Y - 1); r = $urandom_range(ROWS - 1);
        r_col = 5'(c); r_row = 5'(r); #1; checks++;
        if (r_data !== wv[c][r]) begin failures++; $display("read c%0d r%0d", c, r); end
      end
      nwr = 0;
      for (int c = 0; c < Y; c++) begin
        expv[c] = 0;
        for (int s = 0; s < S; s++) begin
          @(negedge clk);
          ld_valid = 1; ld_col = 5'(c); ld_last = (s == S - 1);
          ld_isel = $urandom;
          for (int r = 0; r < ROWS; r++) begin
            ld_row_en[r] = (r / RG == s);
            ld_pair[r] = 16'($urandom);
            if (ld_row_en[r])
              expv[c] += longint'(wv[c][r]) *
                         longint'(ld_isel[r] ? ld_pair[r][15:8] : ld_pair[r][7:0]);
          end
          if (s == S - 1) last_t[c] = cyc;
        end
      end
      @(negedge clk); ld_valid = 0; ld_row_en = '0;
      repeat (12) @(negedge clk);
      checks++;
      if (nwr != Y) begin failures++; $display("%0d columns written", nwr); end
      for (int c = 0; c < Y; c++) begin
        rd_col = 5'(c); #1; checks++;
        if (longint'(rd_psum) != expv[c]) begin
          failures++; $display("col %0d psum %0d exp %0d", c, rd_psum, expv[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
