// Output writer: stores activation results of a layer or streams the final image out.
//
// The datapath delivers one output channel of PE_ROWS (5) vertically adjacent pixels per
// cycle.  For layers 1-6 the writer gathers the 28 channels of a column in a collector; when
// the last channel arrives the complete 5 x 28 column is copied to a write register and written
// into the output ping-pong buffer in 5 cycles (one row word per cycle).  Output columns 6 and 7
// of the tile are written at the same time into the back slot of the overlap buffer, for the
// first columns of the next tile.  The next column arrives at least 27 cycles later, so one
// write register is enough.
// For the last layer every result goes straight to the output stream: image column
// x = 8 * tile - 7 + j, image row y = 60 * strip + 5 * group (first of the 5 pixels) and
// channel och (0..26); columns outside the image are dropped.
// Timing: inputs registered by the activation stage; busy while a column is being written.
// Writing layer outputs back on chip and only the last layer to DRAM follows the paper; the
// collector and the 5-cycle write sequence are this design's choice.
module output_writer
  import sr_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  pix_t       in_pix [PE_ROWS],
  input  logic [3:0] in_group,
  input  logic [2:0] in_col,
  input  logic [4:0] in_och,
  input  logic       in_last_och,
  input  layer_t     layer,
  input  logic [6:0] tile,
  input  logic [2:0] strip,
  input  logic [6:0] tiles_x,
  output logic       busy,
  // ping-pong buffer write port
  output logic       pp_wr_en,
  output logic [3:0] pp_wr_col,
  output logic [5:0] pp_wr_row,
  output chword_t    pp_wr_data,
  // overlap buffer write port (back slot)
  output logic       ov_wr_en,
  output logic       ov_wr_col,
  output logic [5:0] ov_wr_row,
  output chword_t    ov_wr_data,
  // final output stream
  output logic       out_valid,
  output logic [9:0] out_x,
  output logic [8:0] out_y,
  output logic [4:0] out_ch,
  output pix_t       out_pix [PE_ROWS]
);

  chword_t    coll [PE_ROWS];       // collector
  chword_t    wbuf [PE_ROWS];       // write register
  logic [2:0] wcnt;                 // rows still to write
  logic [2:0] wrow;
  logic [3:0] wgrp;
  logic [2:0] wcol;
  logic       last_layer;

  assign last_layer = (int'(layer) == N_LAYERS);

  always_ff @(posedge clk) begin
    if (in_valid && !last_layer) begin
      for (int r = 0; r < int'(PE_ROWS); r++) coll[r][in_och] <= in_pix[r];
      if (in_last_och) begin
        for (int r = 0; r < int'(PE_ROWS); r++) begin
          wbuf[r]         <= coll[r];
          wbuf[r][in_och] <= in_pix[r];
        end
        wgrp <= in_group;
        wcol <= in_col;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt <= '0; wrow <= '0;
    end else if (in_valid && !last_layer && in_last_och) begin
      wcnt <= 3'(PE_ROWS); wrow <= '0;
    end else if (wcnt != 0) begin
      wcnt <= wcnt - 3'd1; wrow <= wrow + 3'd1;
    end
  end

  assign busy       = (wcnt != 0);
  assign pp_wr_en   = (wcnt != 0);
  assign pp_wr_col  = {1'b0, wcol};
  assign pp_wr_row  = 6'(int'(wgrp) * PE_ROWS + int'(wrow));
  assign pp_wr_data = wbuf[wrow];
  assign ov_wr_en   = (wcnt != 0) && (int'(wcol) >= int'(TILE_C - OVL_COLS));
  assign ov_wr_col  = wcol[0];
  assign ov_wr_row  = pp_wr_row;
  assign ov_wr_data = wbuf[wrow];

  // ---- final layer: output stream --------------------------------------------------------
  int x;
  assign x = int'(tile) * TILE_C - N_LAYERS + int'(in_col);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && last_layer && (x >= 0) && (x < int'(tiles_x) * TILE_C);
  end

  always_ff @(posedge clk) begin
    out_x   <= 10'(x);
    out_y   <= 9'(int'(strip) * TILE_R + int'(in_group) * PE_ROWS);
    out_ch  <= in_och;
    out_pix <= in_pix;
  end

endmodule
