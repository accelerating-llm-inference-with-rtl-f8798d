// tb_iact_serializer: loads random iAct pairs into all rows in two groups, then checks
// that eight shift cycles present bits 7..0 of both iActs of every row on BL/BLB.
module tb_iact_serializer;
  localparam int ROWS = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [ROWS-1:0] load, bl, blb;
  logic [15:0]     pair_in [ROWS];
  logic            shift;
  logic [15:0]     ref_pair [ROWS];
  int checks = 0, failures = 0;

  iact_serializer #(.ROWS(ROWS)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = '0; shift = 0;
    for (int r = 0; r < ROWS; r++) pair_in[r] = '0;
    for (int t = 0; t < 20; t++) begin
      for (int half = 0; half < 2; half++) begin
        @(negedge clk);
        for (int r = 0; r < ROWS; r++) begin
          pair_in[r] = 16'($urandom);
          load[r] = ((r / (ROWS / 2)) == half);
          if (load[r]) ref_pair[r] = pair_in[r];
        end
      end
      @(negedge clk); load = '0;
      for (int b = 7; b >= 0; b--) begin
        shift = 1; #1;
        for (int r = 0; r < ROWS; r++) begin
          checks++;
          if (bl[r] !== ref_pair[r][b] || blb[r] !== ref_pair[r][8 + b]) begin
            failures++; $display("row %0d bit %0d", r, b);
          end
        end
        @(negedge clk);
      end
      shift = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
