// bc_local_group: one local group (LG) of a bit-line computing subarray.
//
// The LG is LG_ROWS rows of ROW_W 6T bit-cells. Each row stores WAYS words,
// bit-interleaved: bit i of the word in way w sits in physical column
// i*WAYS + w, so the same bit of both words are neighbours (two-way
// interleaving of the paper). The local bit-line multiplexer picks the way of
// the activated row and hands one word to the LG periphery.
//
// Interface: one word-line activation for reading (rd_en, rd_row, rd_way) and
// one for writing (wr_en, wr_row, wr_way, wr_data) per cycle. The read is
// combinational (the whole BC operation, read, add and write-back, completes
// in one clock cycle); the write takes effect at the rising clock edge.
// Reading and writing the same word in one cycle returns the old value,
// which is what a read-modify-write BC operation needs.
//
// From the paper: the row count, two interleaved 16-bit words per row and the
// way multiplexer. Modelling the cells as a register array with a
// combinational read is this design's choice.
module bc_local_group
  import bc_pkg::*;
#(
  parameter int unsigned ROWS_P = LG_ROWS
) (
  input  logic                      clk,
  input  logic                      rd_en,
  input  logic [$clog2(ROWS_P)-1:0] rd_row,
  input  logic [WAY_W-1:0]          rd_way,
  output word_t                     rd_data,   // to the LG periphery
  input  logic                      wr_en,
  input  logic [$clog2(ROWS_P)-1:0] wr_row,
  input  logic [WAY_W-1:0]          wr_way,
  input  word_t                     wr_data
);

  logic [ROW_W-1:0] cells [ROWS_P];
  logic [ROW_W-1:0] rd_line;

  // Row read, then local BL multiplexer (way select).
  always_comb begin
    rd_line = cells[rd_row];
    rd_data = '0;
    if (rd_en)
      for (int i = 0; i < WORD_W; i++)
        rd_data[i] = rd_line[i*WAYS + int'(rd_way)];
  end

  // Write: only the columns of the selected way are driven.
  always_ff @(posedge clk) begin
    if (wr_en)
      for (int i = 0; i < WORD_W; i++)
        cells[wr_row][i*WAYS + int'(wr_way)] <= wr_data[i];
  end

endmodule
