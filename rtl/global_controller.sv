// global_controller: the global (first-tier) controller of FlexCiM.
//
// It keeps the CSC metadata of the mapped weights (the position, 0..M-1, of each stored
// non-zero inside its block of M), runs the row/column pipeline of one pass and counts
// the merged outputs.
//
// Metadata: m_we writes m_data for the word (m_sm, m_col, m_row). When a stage of
// column c is loaded, the metadata of column c is split as the paper describes: the LSB
// becomes the word's i_sel (2:1 mux in the memory word), the upper bits (dsel) steer the
// distribution-unit multiplexers. Dense operation forces both to zero.
//
// Pipelining: a pass walks the Y columns in order. Column c is fed in S = M/N
// row-pipeline stages (1 when dense); stage s reads iAct-buffer line s and enables the
// RG = ROWS/S rows s*RG .. s*RG+RG-1 (in every sub-macro). One stage is issued per
// cycle, so a new column is started every S cycles while earlier columns finish their
// bit-serial MACs (EN_COL moves to the adjacent column every S cycles).
//
// Timing: 'start' (accepted only when idle and the configuration is legal) latches cfg.
// Buffer reads are issued from the next cycle on; the ld_* command of a stage is
// presented one cycle after its read, aligned with the buffer data. done pulses one
// cycle after the Y-th merged output (mrg_valid); with the sub-macro and merging-unit
// latencies the pass takes Y*S + 13 cycles from the start cycle to the done cycle.
// A new pass is accepted only when idle, so successive passes do not overlap (the
// paper's "EN_COL of the first column is reactivated" is realised as the next pass,
// costing the 13-cycle drain once per pass). The command encoding and this sequencing
// are own choices; the paper gives the rule
// (stages = 32 / rows grouped, EN_COL advances every #stages cycles) but not the logic.
module global_controller #(
  parameter int unsigned ROWS  = flexcim_pkg::X_ROWS / flexcim_pkg::P_PART,
  parameter int unsigned Y     = flexcim_pkg::Y_COLS,
  parameter int unsigned P     = flexcim_pkg::P_PART,
  parameter int unsigned DEPTH = 8
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  flexcim_pkg::nm_cfg_t              cfg_in,
  input  logic                              start,
  output logic                              busy,
  output logic                              done,
  output logic                              pass_start,   // start accepted (clears outputs)
  output flexcim_pkg::nm_cfg_t              cfg,
  // metadata write
  input  logic                              m_we,
  input  logic [$clog2(P)-1:0]              m_sm,
  input  logic [$clog2(Y)-1:0]              m_col,
  input  logic [$clog2(ROWS)-1:0]           m_row,
  input  logic [flexcim_pkg::META_W-1:0]    m_data,
  // iAct buffer read
  output logic                              ab_re,
  output logic [$clog2(DEPTH)-1:0]          ab_addr,
  // stage load command (aligned with the buffer read data)
  output logic                              ld_valid,
  output logic [$clog2(Y)-1:0]              ld_col,
  output logic                              ld_last,
  output logic [ROWS-1:0]                   ld_row_en,
  output logic [ROWS-1:0]                   ld_isel [P],
  output logic [flexcim_pkg::DSEL_W-1:0]    dsel [ROWS][P],
  // merged outputs
  input  logic                              mrg_valid
);
  import flexcim_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_t;

  localparam int unsigned RW = $clog2(ROWS);

  state_t                 state;
  logic [META_W-1:0]      meta [Y][ROWS][P];
  logic [$clog2(Y)-1:0]   col;
  logic [2:0]             stg;
  logic [2:0]             stg_last;
  logic [2:0]             ld_stage;
  logic [$clog2(Y):0]     mcount;

  assign busy     = (state != S_IDLE);
  assign stg_last = 3'((1 << stage_log2(cfg)) - 1);
  assign ab_re    = (state == S_RUN);
  assign ab_addr  = $clog2(DEPTH)'(stg);
  assign pass_start = (state == S_IDLE) && start && cfg_legal(cfg_in);

  always_ff @(posedge clk) begin
    if (m_we) meta[m_col][m_row][m_sm] <= m_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cfg      <= '{n_log2: 2'd0, m_log2: 2'd1};
      col      <= '0;
      stg      <= '0;
      mcount   <= '0;
      done     <= 1'b0;
      ld_valid <= 1'b0;
      ld_col   <= '0;
      ld_last  <= 1'b0;
      ld_stage <= '0;
    end else begin
      done     <= 1'b0;
      ld_valid <= 1'b0;
      ld_last  <= 1'b0;
      if (busy && mrg_valid) mcount <= mcount + 1'b1;
      unique case (state)
        S_IDLE: begin
          if (pass_start) begin
            cfg    <= cfg_in;
            col    <= '0;
            stg    <= '0;
            mcount <= '0;
            state  <= S_RUN;
          end
        end
        S_RUN: begin
          ld_valid <= 1'b1;
          ld_col   <= col;
          ld_stage <= stg;
          ld_last  <= (stg == stg_last);
          if (stg == stg_last) begin
            stg <= '0;
            if (col == $clog2(Y)'(Y - 1)) state <= S_DRAIN;
            else col <= col + 1'b1;
          end else begin
            stg <= stg + 3'd1;
          end
        end
        S_DRAIN: begin
          if (mrg_valid && mcount == ($clog2(Y)+1)'(Y - 1)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // load command: row enables of the current stage and the split metadata
  always_comb begin
    logic [1:0] sl;
    sl = stage_log2(cfg);
    for (int r = 0; r < int'(ROWS); r++) begin
      ld_row_en[r] = ld_valid && ((RW'(r) >> (RW - int'(sl))) == RW'(ld_stage));
      for (int p = 0; p < int'(P); p++) begin
        if (cfg_dense(cfg)) begin
          ld_isel[p][r] = 1'b0;
          dsel[r][p]    = '0;
        end else begin
          ld_isel[p][r] = meta[ld_col][r][p][0];
          dsel[r][p]    = meta[ld_col][r][p][META_W-1:1];
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) m_we |-> !busy);
  assert property (@(posedge clk) disable iff (!rst_n) start |-> cfg_legal(cfg_in));

endmodule
