// distribution_unit: the iAct distribution unit of one row index.
//
// One unit is shared by the spatially identical row ROW of all P sub-macros. It consists
// of P multiplexers, one per sub-macro, each choosing one of P 16-bit input lines (a
// line packs two 8-bit iActs). The select of mux p is the upper metadata bits (position
// of the non-zero within its block of M, without the LSB, which goes to the 2:1 mux in
// the memory word).
//
// Which iAct pairs reach the P inputs of each mux depends on N:M and on this row's
// place within its row-pipeline stage (the steering in front of the muxes; own
// construction, since the paper gives the mapping only by example):
//  * a stage serves RG = ROWS / (M/N) row indices from one 128-iAct buffer line;
//    row ROW is number q = ROW mod RG within its stage;
//  * each row index serves G = P/N groups of N sub-macros, one block of M iActs per
//    group; sub-macro p is in group p/N and holds the (p mod N)-th non-zero of the block;
//  * block b = q*G + p/N covers iActs b*M .. b*M+M-1 of the line, and mux input i is the
//    pair (b*M + 2i, b*M + 2i + 1). Only the first M/2 inputs are used.
//  * dense operation (N = M): each sub-macro row gets iAct q*P + p on both bit-lines
//    and no selection takes place. For M = 2 (1:2) no selection takes place either.
// The unit is combinational.
module distribution_unit #(
  parameter int unsigned ROW  = 0,
  parameter int unsigned X    = flexcim_pkg::X_ROWS,
  parameter int unsigned P    = flexcim_pkg::P_PART,
  parameter int unsigned W    = flexcim_pkg::WORD_W
) (
  input  flexcim_pkg::nm_cfg_t              cfg,
  input  logic [W-1:0]                      line [X],
  input  logic [flexcim_pkg::DSEL_W-1:0]    dsel [P],
  output logic [2*W-1:0]                    pair [P]
);
  import flexcim_pkg::*;

  localparam int unsigned ROWS = X / P;
  localparam int unsigned IW   = $clog2(X);

  logic [2*W-1:0] cand [P][P];   // steered inputs of each P:1 multiplexer
  logic [1:0]     sl, nl, ml;
  logic [IW-1:0]  q, blk, base;

  always_comb begin
    sl   = stage_log2(cfg);
    nl   = n_eff_log2(cfg);
    ml   = m_eff_log2(cfg);
    q    = IW'(ROW) & IW'((ROWS >> sl) - 1);
    blk  = '0;
    base = '0;
    for (int p = 0; p < int'(P); p++) begin
      blk  = (q << (2'($clog2(P)) - nl)) + IW'(p >> nl);
      base = blk << ml;
      for (int i = 0; i < int'(P); i++) begin
        if (cfg_dense(cfg)) begin
          cand[p][i] = {line[base], line[base]};
        end else begin
          cand[p][i] = {line[base + IW'(2*i + 1)], line[base + IW'(2*i)]};
        end
      end
    end
  end

  // the P multiplexers, P:1 each
  always_comb begin
    for (int p = 0; p < int'(P); p++) begin
      logic [DSEL_W-1:0] s;
      s = dsel[p];
      if (cfg_dense(cfg) || ml == 2'd1) s = '0;          // no selection
      else if (ml == 2'd2) s = s & DSEL_W'(1);           // M = 4: two lines
      pair[p] = cand[p][s];
    end
  end

endmodule
