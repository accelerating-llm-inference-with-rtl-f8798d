// tb_adder_tree: random and extreme vectors through a 32-input 8-bit tree (17-bit
// output, the column tree) and a 4-input 24-bit tree (the merging tree).
module tb_adder_tree;
  logic signed [7:0]  a_in [32];
  logic signed [16:0] a_sum;
  logic signed [23:0] b_in [4];
  logic signed [25:0] b_sum;
  int checks = 0, failures = 0;

  adder_tree #(.N(32), .IN_W(8), .OUT_W(17)) dut_a (.din(a_in), .sum(a_sum));
  adder_tree #(.N(4), .IN_W(24), .OUT_W(26)) dut_b (.din(b_in), .sum(b_sum));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      longint ea, eb;
      ea = 0; eb = 0;
      for (int i = 0; i < 32; i++) begin
        a_in[i] = (t == 0) ? -8'sd128 : (t == 1) ? 8'sd127 : 8'($urandom);
        ea += longint'(a_in[i]);
      end
      for (int i = 0; i < 4; i++) begin
        b_in[i] = (t == 0) ? -24'sd8388608 : (t == 1) ? 24'sd8388607 : 24'($urandom);
        eb += longint'(b_in[i]);
      end
      #1;
      checks += 2;
      if (longint'(a_sum) != ea) begin failures++; $display("a %0d exp %0d", a_sum, ea); end
      if (longint'(b_sum) != eb) begin failures++; $display("b %0d exp %0d", b_sum, eb); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
