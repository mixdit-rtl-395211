// operand_buffer -- on-chip buffer of MX groups for one side of a systolic
// array (instantiated as the A buffer and as the W buffer of every tile).
//
// Word g holds, for each of the LANES rows (A buffer) or columns (W buffer)
// of the array, the MX group of K-group g. Groups arrive one at a time from
// off-chip memory (wr_en, wr_lane, wr_addr, wr_data); the tile controller
// reads a whole word (all lanes of one K-group) with a registered read:
// rd_data is valid the cycle after rd_en and holds until the next rd_en.
// The paper names the A and W buffers and gives the 28 MB total of on-chip
// memory, not their organisation; the depth DEPTH and this word layout are
// this design's choice.
module operand_buffer
  import mixdit_pkg::*;
#(
  parameter int LANES_N = SA_DIM,
  parameter int DEPTH   = 32
) (
  input  logic                       clk,
  input  logic                       wr_en,
  input  logic [$clog2(LANES_N)-1:0] wr_lane,
  input  logic [$clog2(DEPTH)-1:0]   wr_addr,
  input  mx_group_t                  wr_data,
  input  logic                       rd_en,
  input  logic [$clog2(DEPTH)-1:0]   rd_addr,
  output mx_group_t                  rd_data [LANES_N]
);

  mx_group_t mem [DEPTH][LANES_N];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr][wr_lane] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
