// tb_iact_buffer: writes all eight 128-iAct lines, then reads them back (one-cycle
// synchronous read) in random order and checks every iAct.
module tb_iact_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_en;
  logic [2:0] wr_addr, rd_addr;
  logic [7:0] wr_data [128];
  logic [7:0] rd_data [128];
  logic [7:0] shadow [8][128];
  int checks = 0, failures = 0;

  iact_buffer dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0;
    for (int l = 0; l < 8; l++) begin
      @(negedge clk); wr_en = 1; wr_addr = 3'(l);
      for (int i = 0; i < 128; i++) begin wr_data[i] = 8'($urandom); shadow[l][i] = wr_data[i]; end
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 50; t++) begin
      int l;
      l = $urandom_range(7);
      @(negedge clk); rd_en = 1; rd_addr = 3'(l);
      @(negedge clk); rd_en = 0; rd_addr = 3'(l + 1);
      for (int i = 0; i < 128; i++) begin
        checks++;
        if (rd_data[i] !== shadow[l][i]) begin failures++; $display("line %0d iact %0d", l, i); end
      end
      @(negedge clk);   // data must hold while rd_en is low
      checks++;
      if (rd_data[5] !== shadow[l][5]) begin failures++; $display("read data not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
