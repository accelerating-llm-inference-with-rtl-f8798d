// output_buffer: holds the merged output partial sums of one pass, one entry per
// column, for the host to read.
//
// Written by the merging unit (wr_en with wr_addr = output column); rd_data shows entry
// rd_addr combinationally. A per-entry valid flag is cleared by 'clear' (the start of a
// pass) and set when the entry is written, so the host can see which outputs are
// final. The paper only names the output buffer; its organisation is an own choice.
module output_buffer #(
  parameter int unsigned DEPTH = flexcim_pkg::Y_COLS,
  parameter int unsigned DW    = flexcim_pkg::TREE_W + flexcim_pkg::WORD_W - 1 + 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [DW-1:0]            wr_data,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [DW-1:0]            rd_data,
  output logic                     rd_valid
);

  logic [DW-1:0]    mem [DEPTH];
  logic [DEPTH-1:0] valid;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
    end else begin
      if (clear) valid <= '0;
      if (wr_en) valid[wr_addr] <= 1'b1;
    end
  end

  assign rd_data  = mem[rd_addr];
  assign rd_valid = valid[rd_addr];

endmodule
