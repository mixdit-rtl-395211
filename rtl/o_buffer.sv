// o_buffer -- output buffer bank of one systolic array.
//
// Holds SLOTS tiles of ROWS x COLS binary32 results. The array drain writes
// one whole row per cycle (wr_en, wr_slot, wr_row, wr_data); the reordering
// controller reads single channels (rd_en, rd_slot, rd_row = token, rd_col =
// channel within this bank) with a registered read: rd_data is valid the
// cycle after rd_en. Two slots let one tile be drained while the previous
// one is still being reordered. The paper names the O buffer and says the
// reordering controller reads channels "from each bank of the output
// buffer"; slots, widths and ports are this design's choice.
module o_buffer #(
  parameter int ROWS  = 16,
  parameter int COLS  = 16,
  parameter int SLOTS = 2
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(SLOTS)-1:0] wr_slot,
  input  logic [$clog2(ROWS)-1:0]  wr_row,
  input  logic [31:0]              wr_data [COLS],
  input  logic                     rd_en,
  input  logic [$clog2(SLOTS)-1:0] rd_slot,
  input  logic [$clog2(ROWS)-1:0]  rd_row,
  input  logic [$clog2(COLS)-1:0]  rd_col,
  output logic [31:0]              rd_data
);

  logic [31:0] mem [SLOTS][ROWS][COLS];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int c = 0; c < COLS; c++) mem[wr_slot][wr_row][c] <= wr_data[c];
    if (rd_en) rd_data <= mem[rd_slot][rd_row][rd_col];
  end

endmodule
