// Overlap buffer: a queue of layers holding the last two columns of every layer of a tile.
//
// With tilted tiles, the first two input columns of layer l of tile t are the last two output
// columns of layer l-1 of tile t-1.  The buffer keeps them as a queue of OVL_SLOTS = L + 2 = 9
// layer slots, each TILE_R rows x 2 columns x MAX_CH channels (9 x 60 x 2 x 28 = 30.24 KB).
// Only the position of the front slot is stored; every other slot is found relative to it:
//   front      (offset 0)           : layer l-1 of the previous tile, read while computing layer l
//   back       (offset OVL_SLOTS-1) : written with the last two output columns of layer l
//   input slot (offset OVL_SLOTS-2) : written with the last two columns of the input tile
// `pop` (end of every layer) drops the front layer, so the next layer becomes the front.
// Slot occupancy: while layer l of tile t runs, the queue holds layers l-1..6 of tile t-1 and
// layers 0..l-1 of tile t (8 slots) plus the back slot being written: 9 slots in all.
// Address = (slot * 2 + column) * TILE_R + row.
// Timing: synchronous read (one cycle), one read and one write port.
// The queue organisation, the L + 2 depth and front-pointer addressing follow the paper; the
// two-port memory and the fixed slot offsets are this design's choice.
module overlap_buffer
  import sr_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       pop,
  input  logic       rd_en,
  input  logic       rd_col,
  input  logic [5:0] rd_row,
  output chword_t    rd_data,
  input  logic       wr_en,
  input  logic       wr_input,   // 1: input slot (tile load), 0: back slot (layer output)
  input  logic       wr_col,
  input  logic [5:0] wr_row,
  input  chword_t    wr_data,
  output logic [3:0] front
);

  localparam int unsigned DEPTH = OVL_SLOTS * OVL_COLS * TILE_R;

  chword_t    mem [DEPTH];
  logic [3:0] wslot;
  logic [$clog2(DEPTH)-1:0] ra, wa;

  assign wslot = 4'((int'(front) + (wr_input ? OVL_SLOTS - 2 : OVL_SLOTS - 1)) % OVL_SLOTS);
  assign ra    = $bits(ra)'((int'(front) * OVL_COLS + int'(rd_col)) * TILE_R + int'(rd_row));
  assign wa    = $bits(wa)'((int'(wslot) * OVL_COLS + int'(wr_col)) * TILE_R + int'(wr_row));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   front <= '0;
    else if (pop) front <= (front == 4'(OVL_SLOTS - 1)) ? '0 : front + 4'd1;
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wa] <= wr_data;
    if (rd_en) rd_data <= mem[ra];
  end

endmodule
