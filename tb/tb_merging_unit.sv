// tb_merging_unit: models four PSum buffers, pulses trig for random columns (including
// back-to-back) and checks that the sum of the four entries appears with its column
// exactly two cycles after trig.
module tb_merging_unit;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic trig, out_valid;
  logic [4:0] trig_col, rd_col, out_col;
  logic signed [23:0] psum_in [4];
  logic signed [25:0] out_data;
  logic signed [23:0] bufs [4][32];
  int checks = 0, failures = 0;
  int q_col [$];
  longint q_sum [$];
  int q_t [$];
  int cyc = 0;

  merging_unit dut (.*);

  always_comb for (int p = 0; p < 4; p++) psum_in[p] = bufs[p][rd_col];
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    trig = 0; trig_col = 0;
    for (int p = 0; p < 4; p++) for (int c = 0; c < 32; c++) bufs[p][c] = 24'($urandom);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      if (out_valid) begin
        checks++;
        if (q_col.size() == 0 || out_col != 5'(q_col[0]) || longint'(out_data) != q_sum[0]
            || cyc - q_t[0] != 2) begin
          failures++; $display("merge col %0d got %0d", out_col, out_data);
        end
        if (q_col.size() != 0) begin void'(q_col.pop_front()); void'(q_sum.pop_front()); void'(q_t.pop_front()); end
      end
      trig = 1'($urandom);
      trig_col = 5'($urandom);
      if (trig) begin
        longint s;
        s = 0;
        for (int p = 0; p < 4; p++) s += longint'(bufs[p][trig_col]);
        q_col.push_back(trig_col); q_sum.push_back(s); q_t.push_back(cyc);
      end
    end
    checks++;
    if (q_col.size() > 2) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
