// tb_psum_accumulator: feeds eight signed column sums (MSB first) and checks
// sum_i 2^i * d_i, the one-cycle result latency, and back-to-back operation.
module tb_psum_accumulator;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic valid, first, last, out_valid;
  logic signed [16:0] din;
  logic signed [23:0] psum;
  int checks = 0, failures = 0;

  psum_accumulator dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid = 0; first = 0; last = 0; din = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      longint e;
      e = 0;
      for (int b = 7; b >= 0; b--) begin
        @(negedge clk);
        valid = 1; first = (b == 7); last = (b == 0);
        din = (t == 0) ? -17'sd4096 : 17'($signed(13'($urandom)));
        e += longint'(din) << b;
        #1; checks++;
        if (out_valid !== 1'b0 && b != 7) begin failures++; $display("early out_valid"); end
      end
      @(negedge clk); valid = 0; first = 0; last = 0;
      checks++;
      if (!out_valid || longint'(psum) != e) begin
        failures++; $display("psum %0d exp %0d v=%b", psum, e, out_valid);
      end
      if (t % 3 == 0) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
