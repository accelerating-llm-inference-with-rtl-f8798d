// tb_column_controller: issues the stage commands of a pass (4 stages per column, the
// 1:4 case) and checks the load one-hot, the i_sel bits captured per column and row,
// the one-cycle start after each column's last stage, and EN_COL rising with the first
// stage and falling on col_done (which the bench returns 9 cycles after start).
module tb_column_controller;
  localparam int ROWS = 32, Y = 32, S = 4, RG = ROWS / S;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic            ld_valid, ld_last;
  logic [4:0]      ld_col;
  logic [ROWS-1:0] ld_row_en, ld_isel;
  logic [Y-1:0]    col_done, ld_col_oh, en_col, start;
  logic [ROWS-1:0] i_sel [Y];
  logic [ROWS-1:0] ref_isel [Y];
  logic [Y-1:0]    ref_en;
  int              start_t [Y];
  int checks = 0, failures = 0, cyc = 0;

  column_controller dut (.*);
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // col_done 9 cycles after start, like a dcim_column
  always @(negedge clk) begin
    col_done = '0;
    for (int c = 0; c < Y; c++) if (start_t[c] >= 0 && cyc - start_t[c] == 8) col_done[c] = 1;
  end
  always @(posedge clk) for (int c = 0; c < Y; c++) if (start[c]) start_t[c] <= cyc;

  initial begin
    ld_valid = 0; ld_last = 0; ld_col = 0; ld_row_en = 0; ld_isel = 0;
    ref_en = '0;
    for (int c = 0; c < Y; c++) begin start_t[c] = -100; ref_isel[c] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      for (int c = 0; c < Y; c++) begin
        for (int s = 0; s < S; s++) begin
          @(negedge clk);
          ld_valid = 1; ld_col = 5'(c); ld_last = (s == S - 1);
          ld_isel = $urandom;
          for (int r = 0; r < ROWS; r++) begin
            ld_row_en[r] = (r / RG == s);
            if (ld_row_en[r]) ref_isel[c][r] = ld_isel[r];
          end
          #1; checks++;
          if (ld_col_oh !== (32'd1 << c)) begin failures++; $display("ld_col_oh c%0d", c); end
          @(posedge clk); #1;
          checks += 2;
          if (start !== ((s == S - 1) ? (32'd1 << c) : 32'd0)) begin
            failures++; $display("start c%0d s%0d: %h", c, s, start); end
          if (!en_col[c]) begin failures++; $display("en_col c%0d not set", c); end
        end
      end
      @(negedge clk); ld_valid = 0;
      repeat (12) @(negedge clk);
      checks++;
      if (en_col !== '0) begin failures++; $display("en_col not cleared %h", en_col); end
      for (int c = 0; c < Y; c++) begin
        checks++;
        if (i_sel[c] !== ref_isel[c]) begin failures++; $display("i_sel col %0d", c); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
