// b_buffer: on-chip tile of the dense matrix B.
//
// Holds DEPTH rows of PES 32-bit words: row r, lane j is element B(r, t*PES+j)
// of the current tile t. Stage 1 writes one word per cycle (wr_row, wr_lane);
// Stage 2 reads a whole row per cycle so that every PE gets its B word in
// parallel. The read is registered: rd_data shows row rd_row one cycle after
// rd_en, as from a block RAM. Contents are not reset.
// The paper gives the tile's shape (width set by the PE count, depth equal
// to the number of B rows); DEPTH = 1024 is this design's choice, enough for
// the largest layers the paper evaluates.
module b_buffer #(
  parameter int unsigned PES   = 32,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_row,
  input  logic [$clog2(PES)-1:0]   wr_lane,
  input  logic [31:0]              wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_row,
  output logic [PES-1:0][31:0]     rd_data
);
  logic [PES-1:0][31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row][wr_lane] <= wr_data;
    if (rd_en) rd_data <= mem[rd_row];
  end
endmodule
