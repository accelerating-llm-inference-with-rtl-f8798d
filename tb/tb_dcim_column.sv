// tb_dcim_column: one sub-macro column at full size (32 rows). Random signed weights
// are written in memory mode and read back; random iAct pairs are loaded in 1, 2, 4 or 8
// row-pipeline stages with random i_sel; after 'start' the bench checks that psum_valid
// comes exactly 8 cycles later with psum = sum_r w[r] * (i_sel[r] ? iAct_b : iAct_a).
module tb_dcim_column;
  localparam int ROWS = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wl, en_col, start, busy, psum_valid;
  logic [4:0] w_row, r_row;
  logic [7:0] wdata, rdata;
  logic [ROWS-1:0] ld_row_en, i_sel;
  logic [15:0] pair_in [ROWS];
  logic signed [23:0] psum;
  logic signed [7:0] wv [ROWS];
  logic [15:0] pv [ROWS];
  int checks = 0, failures = 0;

  dcim_column dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wl = 0; en_col = 0; start = 0; w_row = 0; r_row = 0; wdata = 0; ld_row_en = 0; i_sel = 0;
    for (int r = 0; r < ROWS; r++) pair_in[r] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int s_cnt, rg, lat;
      longint e;
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk); wl = 1; w_row = 5'(r);
        wv[r] = (t == 0) ? -8'sd128 : 8'($urandom); wdata = wv[r];
      end
      @(negedge clk); wl = 0;
      for (int r = 0; r < ROWS; r += 7) begin
        r_row = 5'(r); #1; checks++;
        if (rdata !== wv[r]) begin failures++; $display("read row %0d", r); end
      end
      s_cnt = 1 << (t % 4); rg = ROWS / s_cnt;
      i_sel = $urandom;
      for (int r = 0; r < ROWS; r++) pv[r] = (t == 0) ? 16'hffff : 16'($urandom);
      en_col = 1;
      for (int s = 0; s < s_cnt; s++) begin
        @(negedge clk);
        for (int r = 0; r < ROWS; r++) begin
          ld_row_en[r] = (r / rg == s);
          pair_in[r] = ld_row_en[r] ? pv[r] : 16'($urandom);
        end
      end
      @(negedge clk); ld_row_en = '0; start = 1;
      e = 0;
      for (int r = 0; r < ROWS; r++)
        e += longint'(wv[r]) * longint'(i_sel[r] ? pv[r][15:8] : pv[r][7:0]);
      @(negedge clk); start = 0;
      lat = 1;
      while (!psum_valid && lat < 20) begin @(negedge clk); lat++; end
      checks += 2;
      if (lat != 8) begin failures++; $display("latency %0d", lat); end
      if (longint'(psum) != e) begin failures++; $display("psum %0d exp %0d", psum, e); end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("busy after MAC"); end
      en_col = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
