// tb_dcim_word: checks the memory word: write/read in memory mode, and the eight
// partial products for every combination of BL, BLB, i_sel, EN_COL and WL.
module tb_dcim_word;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wl, en_col, bl, blb, i_sel;
  logic [7:0] wdata, rdata, prod;
  int checks = 0, failures = 0;

  dcim_word dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wl = 0; en_col = 0; bl = 0; blb = 0; i_sel = 0; wdata = 0;
    for (int t = 0; t < 64; t++) begin
      logic [7:0] w;
      w = 8'($urandom);
      @(negedge clk); wl = 1; wdata = w; en_col = 1; bl = 1; blb = 1;
      #1; checks++;
      if (prod !== 8'h00) begin failures++; $display("compute while WL=1"); end
      @(negedge clk); wl = 0; wdata = ~w;
      #1; checks++;
      if (rdata !== w) begin failures++; $display("read %h exp %h", rdata, w); end
      for (int v = 0; v < 16; v++) begin
        logic exp_bit;
        {en_col, bl, blb, i_sel} = 4'(v);
        #1;
        exp_bit = en_col & (i_sel ? blb : bl);
        checks++;
        if (prod !== (exp_bit ? w : 8'h00)) begin
          failures++; $display("prod %h for w=%h v=%0d", prod, w, v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
