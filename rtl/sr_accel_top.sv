// Real-time x3 super-resolution accelerator with tilted layer fusion (top level).
//
// A seven-layer 3x3 CNN runs on 28 PE blocks (28 x 3 arrays x 5 x 3 MACs = 1260 MACs), one PE
// block per input channel.  Each compute cycle produces one output channel for a column of 5
// pixels: the 28 blocks multiply the broadcast 3-column x 7-row input window by the 3x3 kernels
// of that output channel, a two-stage pipelined accumulator adds all products plus a bias
// (layers 1-6) or the input pixel as residual (layer 7), and the activation stage rounds,
// applies ReLU and saturates to 8 bits.  All intermediate feature maps stay on chip: a tile
// (60 rows x 8 columns) lives in one of two ping-pong buffers, and because every layer of a
// tile is shifted one column left of the previous one, only the last two columns of each layer
// must be kept for the next tile, in the overlap buffer (a queue of 9 layer slots).
//
// Interface
//   start, cfg_tiles_x (= width / 8), cfg_strips (= height / 60), per-layer shifts:
//     cfg_addend_shift[l]: left shift of bias / residual into the accumulator's fixed point,
//     cfg_out_shift[l]   : right shift (rounding) from accumulator to 8-bit feature map.
//   wt_we / wt_waddr / wt_wdata: weight SRAM words (before start); bias_we / ...: bias bytes.
//   in_valid / in_ready / in_pix: input RGB pixels, strip by strip, tile by tile, each tile
//     column by column (top to bottom); 8 x 60 pixels per tile.
//   out_valid / out_x / out_y / out_ch / out_pix: last-layer results, 5 vertically adjacent
//     pixels (rows out_y .. out_y+4) of channel out_ch (0..26) at low-resolution column out_x.
//     Channel ch is colour ch mod 3 of high-resolution sub-pixel (ch / 3) of the 3 x 3 block.
//   busy, done.
// Timing: one output channel of 5 pixels per cycle while computing; at most 19,108 compute
// cycles plus 480 load cycles per tile, and 9,519,769 cycles for a 640 x 360 frame (81 x 6
// tiles, input always ready), below the 10 M cycles a 600 MHz clock gives at 60 frames/s.
// Lint notes: rst_n is reported as used both synchronously and asynchronously only because the
// assertion below names it in its disable condition; every flop resets asynchronously.  The
// overlap buffer's front pointer output is left unused here; it is an observation port for the
// buffer's own testbench.
// The block structure follows the paper's system figure; the stream interfaces, the column
// fetcher, the write-back collector and the number formats are this design's choice.
module sr_accel_top
  import sr_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [6:0] cfg_tiles_x,
  input  logic [2:0] cfg_strips,
  input  logic [4:0] cfg_addend_shift [N_LAYERS],
  input  logic [4:0] cfg_out_shift    [N_LAYERS],
  output logic       busy,
  output logic       done,
  // parameter load
  input  logic       wt_we,
  input  logic [7:0] wt_waddr,
  input  wword_t     wt_wdata,
  input  logic       bias_we,
  input  logic [7:0] bias_waddr,
  input  wgt_t       bias_wdata,
  // input image stream
  input  logic       in_valid,
  output logic       in_ready,
  input  pix_t       in_pix [IN_CH],
  // output stream
  output logic       out_valid,
  output logic [9:0] out_x,
  output logic [8:0] out_y,
  output logic [4:0] out_ch,
  output pix_t       out_pix [PE_ROWS]
);

  // ---------------------------------------------------------------- controller
  logic       ld_we, ld_zero, pp_swap, ov_pop, res_clear, res_advance;
  logic       fetch_start, fifo_nonempty, win_shift, pipe_idle;
  logic       c_valid, c_last_och;
  logic [3:0] ld_col, c_group;
  logic [5:0] ld_row;
  logic [2:0] c_col, strip;
  logic [4:0] c_och, wt_rd_och;
  logic [6:0] tile, tiles_x;
  layer_t     layer, wt_rd_layer;

  tlf_controller u_ctrl (
    .clk, .rst_n, .start, .cfg_tiles_x, .cfg_strips, .busy, .done,
    .in_valid, .in_ready,
    .ld_we, .ld_col, .ld_row, .ld_zero,
    .layer, .tile, .strip, .tiles_x, .pp_swap, .ov_pop, .res_clear, .res_advance,
    .fetch_start, .fifo_nonempty, .win_shift,
    .c_valid, .c_group, .c_col, .c_och, .c_last_och, .wt_rd_och, .wt_rd_layer,
    .pipe_idle
  );

  logic loading;
  assign loading = (layer == '0);

  chword_t ld_word;
  always_comb begin
    ld_word = '0;
    if (!ld_zero) for (int c = 0; c < int'(IN_CH); c++) ld_word[c] = in_pix[c];
  end

  // ---------------------------------------------------------------- buffers
  logic       pp_rd_en, pp_wr_en, w_pp_wr_en;
  logic [3:0] pp_rd_col, pp_wr_col, w_pp_wr_col;
  logic [5:0] pp_rd_row, pp_wr_row, w_pp_wr_row;
  chword_t    pp_rd_data, pp_wr_data, w_pp_wr_data;

  assign pp_wr_en   = loading ? ld_we   : w_pp_wr_en;
  assign pp_wr_col  = loading ? ld_col  : w_pp_wr_col;
  assign pp_wr_row  = loading ? ld_row  : w_pp_wr_row;
  assign pp_wr_data = loading ? ld_word : w_pp_wr_data;

  pingpong_buffer u_pp (
    .clk, .swap(pp_swap),
    .rd_en(pp_rd_en), .rd_col(pp_rd_col), .rd_row(pp_rd_row), .rd_data(pp_rd_data),
    .wr_en(pp_wr_en), .wr_col(pp_wr_col), .wr_row(pp_wr_row), .wr_data(pp_wr_data)
  );

  logic       ov_rd_en, ov_rd_col, ov_wr_en, w_ov_wr_en, ov_wr_col, w_ov_wr_col;
  logic [5:0] ov_rd_row, ov_wr_row, w_ov_wr_row;
  logic [3:0] ov_front;
  chword_t    ov_rd_data, ov_wr_data, w_ov_wr_data;

  assign ov_wr_en   = loading ? (ld_we && int'(ld_col) >= int'(TILE_C - OVL_COLS)) : w_ov_wr_en;
  assign ov_wr_col  = loading ? ld_col[0] : w_ov_wr_col;
  assign ov_wr_row  = loading ? ld_row    : w_ov_wr_row;
  assign ov_wr_data = loading ? ld_word   : w_ov_wr_data;

  overlap_buffer u_ov (
    .clk, .rst_n, .pop(ov_pop),
    .rd_en(ov_rd_en), .rd_col(ov_rd_col), .rd_row(ov_rd_row), .rd_data(ov_rd_data),
    .wr_en(ov_wr_en), .wr_input(loading), .wr_col(ov_wr_col), .wr_row(ov_wr_row),
    .wr_data(ov_wr_data), .front(ov_front)
  );

  // residual: gather 5 rows of a column while loading, then write one word
  pix_t rcoll [PE_ROWS-1][IN_CH];
  pix_t res_wdata [PE_ROWS][IN_CH];
  pix_t res_rdata [PE_ROWS];
  logic [2:0] ld_sub;
  logic       res_we;

  assign ld_sub = 3'(int'(ld_row) % PE_ROWS);
  assign res_we = loading && ld_we && (int'(ld_sub) == PE_ROWS - 1);

  always_ff @(posedge clk)
    if (loading && ld_we && int'(ld_sub) < PE_ROWS - 1)
      for (int c = 0; c < int'(IN_CH); c++) rcoll[2'(ld_sub)][c] <= ld_word[c];

  always_comb
    for (int c = 0; c < int'(IN_CH); c++) begin
      for (int r = 0; r < int'(PE_ROWS) - 1; r++) res_wdata[r][c] = rcoll[r][c];
      res_wdata[PE_ROWS-1][c] = ld_word[c];
    end

  residual_sram u_res (
    .clk, .rst_n, .clear(res_clear), .advance(res_advance),
    .wr_en(res_we), .wr_col(ld_col), .wr_group(4'(int'(ld_row) / PE_ROWS)), .wr_data(res_wdata),
    .rd_en(c_valid), .rd_col({1'b0, c_col}), .rd_group(c_group), .rd_color(2'(int'(c_och) % IN_CH)),
    .rd_data(res_rdata)
  );

  wword_t wt_rd_data;
  weight_sram u_wt (
    .clk, .wr_en(wt_we), .wr_addr(wt_waddr), .wr_data(wt_wdata),
    .rd_en(1'b1), .rd_layer(wt_rd_layer), .rd_och(wt_rd_och), .rd_data(wt_rd_data)
  );

  wgt_t bias_rdata;
  bias_sram u_bias (
    .clk, .wr_en(bias_we), .wr_addr(bias_waddr), .wr_data(bias_wdata),
    .rd_en(c_valid), .rd_layer(layer), .rd_och(c_och), .rd_data(bias_rdata)
  );

  // ---------------------------------------------------------------- input window
  wincol_t fetch_head;
  wincol_t win [K];

  column_fetcher u_fetch (
    .clk, .rst_n, .start(fetch_start), .layer, .tile, .tiles_x,
    .pop(win_shift), .head(fetch_head), .nonempty(fifo_nonempty),
    .pp_rd_en, .pp_rd_col, .pp_rd_row, .pp_rd_data,
    .ov_rd_en, .ov_rd_col, .ov_rd_row, .ov_rd_data
  );

  always_ff @(posedge clk)
    if (win_shift) begin
      win[0] <= win[1];
      win[1] <= win[2];
      win[2] <= fetch_head;
    end

  // ---------------------------------------------------------------- PE blocks
  psum_t psum [MAX_CH][K][PE_ROWS];

  for (genvar b = 0; b < MAX_CH; b++) begin : g_pe
    pix_t  bwin [K][WIN_ROWS];
    wgt_t  bw   [K][K];
    always_comb
      for (int k = 0; k < int'(K); k++) begin
        for (int r = 0; r < int'(WIN_ROWS); r++) bwin[k][r] = win[k][r][b];
        for (int d = 0; d < int'(K); d++)        bw[k][d]   = wt_rd_data[b][k][d];
      end
    pe_block u_pe (.win(bwin), .w(bw), .psum(psum[b]));
  end

  // ---------------------------------------------------------------- accumulator, activation
  logic       acc_valid, act_valid;
  acc_t       acc_sum [PE_ROWS];
  pix_t       act_pix [PE_ROWS];
  logic [2:0] lidx;
  assign lidx = (layer == '0) ? 3'd0 : 3'(int'(layer) - 1);

  accumulator u_acc (
    .clk, .rst_n, .in_valid(c_valid), .psum,
    .in_sel_res(int'(layer) == N_LAYERS), .in_addend_shift(cfg_addend_shift[lidx]),
    .bias(bias_rdata), .res(res_rdata),
    .out_valid(acc_valid), .out_sum(acc_sum)
  );

  activation u_act (
    .clk, .rst_n, .in_valid(acc_valid), .in_sum(acc_sum), .out_shift(cfg_out_shift[lidx]),
    .out_valid(act_valid), .out_pix(act_pix)
  );

  // control side band travelling with the data (accumulator 3 + activation 1 cycles)
  localparam int unsigned LAT = 4;
  typedef struct packed {
    logic       v;
    logic [3:0] group;
    logic [2:0] col;
    logic [4:0] och;
    logic       last;
  } ctl_t;
  ctl_t ctl_q [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < int'(LAT); i++) ctl_q[i] <= '0;
    else begin
      ctl_q[0] <= '{v: c_valid, group: c_group, col: c_col, och: c_och, last: c_last_och};
      for (int i = 1; i < int'(LAT); i++) ctl_q[i] <= ctl_q[i-1];
    end
  end

  logic wr_busy;
  always_comb begin
    pipe_idle = !c_valid && !wr_busy;
    for (int i = 0; i < int'(LAT); i++) if (ctl_q[i].v) pipe_idle = 1'b0;
  end

  output_writer u_wr (
    .clk, .rst_n, .in_valid(act_valid), .in_pix(act_pix),
    .in_group(ctl_q[LAT-1].group), .in_col(ctl_q[LAT-1].col), .in_och(ctl_q[LAT-1].och),
    .in_last_och(ctl_q[LAT-1].last), .layer, .tile, .strip, .tiles_x,
    .busy(wr_busy),
    .pp_wr_en(w_pp_wr_en), .pp_wr_col(w_pp_wr_col), .pp_wr_row(w_pp_wr_row), .pp_wr_data(w_pp_wr_data),
    .ov_wr_en(w_ov_wr_en), .ov_wr_col(w_ov_wr_col), .ov_wr_row(w_ov_wr_row), .ov_wr_data(w_ov_wr_data),
    .out_valid, .out_x, .out_y, .out_ch, .out_pix
  );

  // the activation output and its side band must stay aligned
  assert property (@(posedge clk) disable iff (!rst_n) act_valid == ctl_q[LAT-1].v)
    else $error("datapath and control side band out of step");

endmodule
