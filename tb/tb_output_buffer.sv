// tb_output_buffer: checks that 'clear' drops all valid flags, writes set the flag and
// the data of their entry, and reads return what was written.
module tb_output_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, wr_en, rd_valid;
  logic [4:0] wr_addr, rd_addr;
  logic [25:0] wr_data, rd_data;
  logic [25:0] shadow [32];
  logic        sv [32];
  int checks = 0, failures = 0;

  output_buffer dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; wr_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    for (int i = 0; i < 32; i++) sv[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      clear = ($urandom_range(99) == 0);
      wr_en = 1'($urandom); wr_addr = 5'($urandom); wr_data = 26'($urandom);
      rd_addr = 5'($urandom);
      #1;
      checks++;
      if (rd_valid !== sv[rd_addr] || (sv[rd_addr] && rd_data !== shadow[rd_addr])) begin
        failures++; $display("entry %0d valid %b exp %b", rd_addr, rd_valid, sv[rd_addr]);
      end
      if (clear) for (int i = 0; i < 32; i++) sv[i] = 0;
      if (wr_en) begin sv[wr_addr] = 1; shadow[wr_addr] = wr_data; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
