// psum_buffer: partial-sum buffer of one sub-macro.
//
// One entry per column. A column's finished partial sum is written on the clock edge
// when wr_en is high; the merging unit reads any entry combinationally through rd_addr.
// The paper names the buffer and says the merging unit reads from it; depth (one entry
// per column) and the combinational read are own choices.
module psum_buffer #(
  parameter int unsigned DEPTH = flexcim_pkg::Y_COLS,
  parameter int unsigned DW    = flexcim_pkg::TREE_W + flexcim_pkg::WORD_W - 1
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [DW-1:0]            wr_data,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [DW-1:0]            rd_data
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  assign rd_data = mem[rd_addr];

endmodule
