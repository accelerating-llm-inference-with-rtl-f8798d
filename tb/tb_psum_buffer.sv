// tb_psum_buffer: random writes and reads of the 32-entry partial-sum buffer against
// a shadow copy.
module tb_psum_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en;
  logic [4:0] wr_addr, rd_addr;
  logic [23:0] wr_data, rd_data;
  logic [23:0] shadow [32];
  logic        written [32];
  int checks = 0, failures = 0;

  psum_buffer dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    for (int i = 0; i < 32; i++) written[i] = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      wr_en = 1'($urandom); wr_addr = 5'($urandom); wr_data = 24'($urandom);
      if (wr_en) begin shadow[wr_addr] = wr_data; written[wr_addr] = 1; end
      rd_addr = 5'($urandom);
      #1;
      if (written[rd_addr] && !(wr_en && wr_addr == rd_addr)) begin
        checks++;
        if (rd_data !== shadow[rd_addr]) begin failures++; $display("entry %0d", rd_addr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
