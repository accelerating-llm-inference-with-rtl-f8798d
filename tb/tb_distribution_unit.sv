// tb_distribution_unit: for every N:M mode, three row positions and random lines and
// selects, checks the pair each sub-macro receives against the block arithmetic:
// row q of its stage, sub-macro p in group p/N, block b = q*(P/N) + p/N, pair starting
// at iAct b*M + 2*dsel (dense: iAct q*P + p on both halves).
module tb_distribution_unit;
  import flexcim_pkg::*;
  localparam int P = 4, X = 128, ROWS = 32;
  nm_cfg_t cfg;
  logic [7:0]  line [X];
  logic [1:0]  dsel [P];
  logic [15:0] pair0 [P], pair5 [P], pair31 [P];
  int checks = 0, failures = 0;

  distribution_unit #(.ROW(0))  du0  (.cfg(cfg), .line(line), .dsel(dsel), .pair(pair0));
  distribution_unit #(.ROW(5))  du5  (.cfg(cfg), .line(line), .dsel(dsel), .pair(pair5));
  distribution_unit #(.ROW(31)) du31 (.cfg(cfg), .line(line), .dsel(dsel), .pair(pair31));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] expect_pair(int row, int nl, int ml, int p, int sel);
    int n, m, stages, rg, q, g, b, a;
    if (nl == ml) begin
      q = row;            // one stage: all 32 rows
      a = q * P + p;
      return {line[a], line[a]};
    end
    n = 1 << nl; m = 1 << ml;
    stages = m / n; rg = ROWS / stages; q = row % rg;
    g = P / n;
    b = q * g + p / n;
    if (m == 2) sel = 0;
    a = b * m + 2 * (sel % (m / 2));
    return {line[a + 1], line[a]};
  endfunction

  initial begin
    int modes [7][2] = '{'{3,3}, '{0,1}, '{0,2}, '{1,2}, '{0,3}, '{1,3}, '{2,3}};
    for (int t = 0; t < 200; t++) begin
      for (int md = 0; md < 7; md++) begin
        cfg = '{n_log2: 2'(modes[md][0]), m_log2: 2'(modes[md][1])};
        for (int i = 0; i < X; i++) line[i] = 8'($urandom);
        for (int p = 0; p < P; p++) begin
          // in M = 4 only the LSB of the select is meaningful
          dsel[p] = (modes[md][1] == 2) ? 2'($urandom_range(1)) : 2'($urandom);
        end
        #1;
        for (int p = 0; p < P; p++) begin
          checks += 3;
          if (pair0[p] !== expect_pair(0, modes[md][0], modes[md][1], p, dsel[p])) begin
            failures++; $display("row0 md%0d p%0d", md, p); end
          if (pair5[p] !== expect_pair(5, modes[md][0], modes[md][1], p, dsel[p])) begin
            failures++; $display("row5 md%0d p%0d", md, p); end
          if (pair31[p] !== expect_pair(31, modes[md][0], modes[md][1], p, dsel[p])) begin
            failures++; $display("row31 md%0d p%0d", md, p); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
