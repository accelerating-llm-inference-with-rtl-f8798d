// iact_buffer: the local (level-1) input-activation buffer.
//
// Each line holds X (128) 8-bit iActs, and one full line (1024 bits) can be read per
// cycle, which is the bandwidth the paper gives. The host writes whole lines. Reads are
// synchronous: rd_data shows line rd_addr one cycle after rd_en.
// Depth (own choice): 8 lines, the most one pass needs (1:8 uses 8 row-pipeline stages,
// each reading its own line, so one pass consumes up to 8 x 128 = 1024 iActs).
module iact_buffer #(
  parameter int unsigned X     = flexcim_pkg::X_ROWS,
  parameter int unsigned W     = flexcim_pkg::WORD_W,
  parameter int unsigned DEPTH = 8
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [W-1:0]             wr_data [X],
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [W-1:0]             rd_data [X]
);

  logic [X*W-1:0] mem [DEPTH];
  logic [X*W-1:0] wr_flat;
  logic [X*W-1:0] rd_flat;

  always_comb begin
    for (int i = 0; i < int'(X); i++) begin
      wr_flat[i*W +: W] = wr_data[i];
      rd_data[i]        = rd_flat[i*W +: W];
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_flat;
    if (rd_en) rd_flat <= mem[rd_addr];
  end

endmodule
