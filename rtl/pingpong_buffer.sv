// I/O ping-pong buffers: the left and right tile buffers.
//
// Each buffer holds one layer of one tile: TILE_R x TILE_C positions, one word of MAX_CH
// 8-bit channels per position (60 x 8 x 28 = 13.44 KB each).  One buffer supplies the input of
// the layer being computed, the other receives its output; `swap` selects the roles:
//   swap = 0: read the left buffer, write the right one
//   swap = 1: read the right buffer, write the left one
// The controller toggles the roles every layer (odd layers read the left buffer), and loads
// the input tile into the left buffer (swap = 1, write only).
// Address of a position = column * TILE_R + row.
// Timing: synchronous read, data one cycle after rd_en; write in the same cycle as wr_en.
// Sizes and role switching follow the paper; the word layout is this design's choice.
module pingpong_buffer
  import sr_pkg::*;
(
  input  logic       clk,
  input  logic       swap,
  input  logic       rd_en,
  input  logic [3:0] rd_col,
  input  logic [5:0] rd_row,
  output chword_t    rd_data,
  input  logic       wr_en,
  input  logic [3:0] wr_col,
  input  logic [5:0] wr_row,
  input  chword_t    wr_data
);

  localparam int unsigned DEPTH = TILE_R * TILE_C;

  chword_t left_mem  [DEPTH];
  chword_t right_mem [DEPTH];
  logic [$clog2(DEPTH)-1:0] ra, wa;

  assign ra = $bits(ra)'(int'(rd_col) * TILE_R + int'(rd_row));
  assign wa = $bits(wa)'(int'(wr_col) * TILE_R + int'(wr_row));

  always_ff @(posedge clk) begin
    if (wr_en &&  swap) left_mem[wa]  <= wr_data;
    if (wr_en && !swap) right_mem[wa] <= wr_data;
    if (rd_en) rd_data <= swap ? right_mem[ra] : left_mem[ra];
  end

endmodule
