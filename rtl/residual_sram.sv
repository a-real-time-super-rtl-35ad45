// Residual SRAM: input pixels kept for the anchor (residual) addition of the last layer.
//
// Because the last layer of tile t is N_LAYERS columns to the left of its input columns, the
// residual of tile t spans input columns 8t-7 .. 8t, so the buffer keeps TILE_C + N_LAYERS =
// 15 columns of TILE_R rows x 3 colours (2.7 KB) and is used as a circular column store.  A
// base pointer marks the position of the current tile's first input column; `advance` moves it
// by TILE_C (mod 15) when a tile is finished, `clear` resets it at the start of a strip.
// A word holds one row group (PE_ROWS rows) of one column, all three colours.
//   write: tile-relative input column wr_col (0..7), row group wr_group
//   read : output column rd_col (0..7) of the last layer, i.e. input column rd_col - 7 relative
//          to the tile, row group rd_group, colour rd_color; returns PE_ROWS pixels.
// Timing: synchronous read, one cycle.  Size (Ch0 x R x (C + L)) follows the paper; word
// organisation and the pointer scheme are this design's choice.
module residual_sram
  import sr_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       advance,
  input  logic       wr_en,
  input  logic [3:0] wr_col,
  input  logic [3:0] wr_group,
  input  pix_t       wr_data [PE_ROWS][IN_CH],
  input  logic       rd_en,
  input  logic [3:0] rd_col,
  input  logic [3:0] rd_group,
  input  logic [1:0] rd_color,
  output pix_t       rd_data [PE_ROWS]
);

  localparam int unsigned DEPTH = RES_COLS * N_GROUPS;
  typedef pix_t [PE_ROWS-1:0][IN_CH-1:0] rword_t;

  rword_t     mem [DEPTH];
  logic [3:0] base;
  rword_t     rq;
  logic [1:0] color_q;

  function automatic logic [3:0] wrap(input int unsigned v);
    return 4'(v % RES_COLS);
  endfunction

  logic [3:0] wpos, rpos;
  assign wpos = wrap(int'(base) + int'(wr_col));
  assign rpos = wrap(int'(base) + RES_COLS + int'(rd_col) - N_LAYERS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       base <= '0;
    else if (clear)   base <= '0;
    else if (advance) base <= wrap(int'(base) + TILE_C);
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      rword_t w;
      for (int r = 0; r < int'(PE_ROWS); r++)
        for (int c = 0; c < int'(IN_CH); c++) w[r][c] = wr_data[r][c];
      mem[int'(wpos) * N_GROUPS + int'(wr_group)] <= w;
    end
    if (rd_en) begin
      rq      <= mem[int'(rpos) * N_GROUPS + int'(rd_group)];
      color_q <= rd_color;
    end
  end

  always_comb
    for (int r = 0; r < int'(PE_ROWS); r++) rd_data[r] = rq[r][color_q];

endmodule
