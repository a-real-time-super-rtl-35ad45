// Tilted-layer-fusion controller.
//
// Processes a frame strip by strip (TILE_R = 60 rows each) and every strip tile by tile from
// left to right (TILE_C = 8 columns each, plus one extra tile at the right edge that flushes the
// columns the tilted layers still owe).  For each tile it runs:
//   LOAD   : read the 8 x 60 input pixels (column by column, top to bottom) from the input
//            stream into the left ping-pong buffer; columns beyond the image are written as 0
//            without consuming the stream.
//   LAYER l (l = 1..7): start the column fetcher, then issue one compute cycle per
//            (row group g, output column j, output channel o), g = 0..11, j = 0..7,
//            o = 0..27 (26 for the last layer).  Before row group g the three first input
//            columns are shifted into the PE window; afterwards one column per output column.
//            A shift is overlapped with the last channel of the previous column whenever the
//            fetcher already has the column; otherwise the schedule waits.
//   DRAIN  : wait until the results of the layer are written back, then pop the overlap
//            queue and swap the ping-pong roles (odd layers read the left buffer).
// Layer l of tile t computes image columns 8t-l .. 8t-l+7: the one-column left shift per layer
// that makes the tile a parallelepiped.
//
// The weight-SRAM read address is taken from the next-state values so that the weights of a
// compute cycle arrive in that cycle.  Cycle budget per tile: 7 x 12 x (8 x 28 + 2) compute and
// shift cycles plus about 480 load cycles and a short drain per layer.
// The tile and layer order, the tilt, the buffer role swap and the queue pops follow the paper;
// the load order, the extra right-edge tile and the cycle-level schedule are this design's.
module tlf_controller
  import sr_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [6:0] cfg_tiles_x,   // image width / TILE_C  (1..MAX_TILES_X)
  input  logic [2:0] cfg_strips,    // image height / TILE_R (1..MAX_STRIPS)
  output logic       busy,
  output logic       done,          // one cycle at the end of the frame
  // input stream
  input  logic       in_valid,
  output logic       in_ready,
  // tile load writes (data comes from the stream, zero when ld_zero)
  output logic       ld_we,
  output logic [3:0] ld_col,
  output logic [5:0] ld_row,
  output logic       ld_zero,
  // position
  output layer_t     layer,         // 0 while loading, else 1..N_LAYERS
  output logic [6:0] tile,
  output logic [2:0] strip,
  output logic [6:0] tiles_x,       // latched cfg_tiles_x
  output logic       pp_swap,
  output logic       ov_pop,
  output logic       res_clear,
  output logic       res_advance,
  // column fetcher
  output logic       fetch_start,
  input  logic       fifo_nonempty,
  output logic       win_shift,
  // compute issue
  output logic       c_valid,
  output logic [3:0] c_group,
  output logic [2:0] c_col,
  output logic [4:0] c_och,
  output logic       c_last_och,
  output logic [4:0] wt_rd_och,     // weight address for the next cycle
  output layer_t     wt_rd_layer,
  input  logic       pipe_idle
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_LSTART, S_COMP, S_DRAIN, S_NEXT} state_t;
  state_t st, st_n;

  layer_t     layer_n;
  logic [6:0] tile_n;
  logic [2:0] strip_n;
  logic [3:0] g, g_n;
  logic [2:0] j, j_n;
  logic [4:0] o, o_n;
  logic [1:0] need, need_n;
  logic [3:0] lc, lc_n;     // load column
  logic [5:0] lr, lr_n;     // load row
  logic [6:0] tx_q;
  logic [2:0] sy_q;

  logic [4:0] last_o;
  assign last_o = 5'(layer_och(int'(layer)) - 1);

  // load: is the current column inside the image?
  logic ld_in_img;
  assign ld_in_img = (int'(tile) * TILE_C + int'(lc)) < int'(tx_q) * TILE_C;

  always_comb begin
    st_n = st; layer_n = layer; tile_n = tile; strip_n = strip;
    g_n = g; j_n = j; o_n = o; need_n = need; lc_n = lc; lr_n = lr;
    in_ready = 1'b0; ld_we = 1'b0; ld_zero = !ld_in_img;
    fetch_start = 1'b0; win_shift = 1'b0; c_valid = 1'b0; c_last_och = 1'b0;
    ov_pop = 1'b0; res_clear = 1'b0; res_advance = 1'b0; done = 1'b0;
    unique case (st)
      S_IDLE: if (start) begin
        st_n = S_LOAD; tile_n = '0; strip_n = '0; layer_n = '0; lc_n = '0; lr_n = '0;
        res_clear = 1'b1;
      end
      S_LOAD: begin
        in_ready = ld_in_img;
        ld_we    = !ld_in_img || in_valid;
        if (ld_we) begin
          if (lr == 6'(TILE_R - 1)) begin
            lr_n = '0;
            if (lc == 4'(TILE_C - 1)) begin
              lc_n = '0; st_n = S_LSTART; layer_n = 1;
            end else lc_n = lc + 4'd1;
          end else lr_n = lr + 6'd1;
        end
      end
      S_LSTART: begin
        fetch_start = 1'b1;
        g_n = '0; j_n = '0; o_n = '0; need_n = 2'd3; st_n = S_COMP;
      end
      S_COMP: begin
        if (need != 0) begin
          if (fifo_nonempty) begin win_shift = 1'b1; need_n = need - 2'd1; end
        end else begin
          c_valid = 1'b1;
          if (o == last_o) begin
            c_last_och = 1'b1;
            o_n = '0;
            if (j == 3'(TILE_C - 1)) begin
              j_n = '0;
              if (g == 4'(N_GROUPS - 1)) st_n = S_DRAIN;
              else begin
                g_n = g + 4'd1;
                win_shift = fifo_nonempty;
                need_n = fifo_nonempty ? 2'd2 : 2'd3;
              end
            end else begin
              j_n = j + 3'd1;
              win_shift = fifo_nonempty;
              need_n = fifo_nonempty ? 2'd0 : 2'd1;
            end
          end else o_n = o + 5'd1;
        end
      end
      S_DRAIN: if (pipe_idle) begin
        ov_pop = 1'b1;
        if (int'(layer) == N_LAYERS) st_n = S_NEXT;
        else begin layer_n = layer + 1'b1; st_n = S_LSTART; end
      end
      S_NEXT: begin
        res_advance = 1'b1;
        layer_n = '0;
        if (tile == tx_q) begin           // the flush tile was the last of the strip
          tile_n = '0;
          res_clear = 1'b1;
          res_advance = 1'b0;
          if (strip == sy_q - 3'd1) begin st_n = S_IDLE; done = 1'b1; end
          else begin strip_n = strip + 3'd1; st_n = S_LOAD; end
        end else begin
          tile_n = tile + 7'd1; st_n = S_LOAD;
        end
      end
      default: st_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; layer <= '0; tile <= '0; strip <= '0;
      g <= '0; j <= '0; o <= '0; need <= '0; lc <= '0; lr <= '0;
      tx_q <= '0; sy_q <= '0;
    end else begin
      st <= st_n; layer <= layer_n; tile <= tile_n; strip <= strip_n;
      g <= g_n; j <= j_n; o <= o_n; need <= need_n; lc <= lc_n; lr <= lr_n;
      if (st == S_IDLE && start) begin tx_q <= cfg_tiles_x; sy_q <= cfg_strips; end
    end
  end

  assign busy        = (st != S_IDLE);
  assign tiles_x     = tx_q;
  assign ld_col      = lc;
  assign ld_row      = lr;
  assign pp_swap     = (st == S_LOAD) ? 1'b1 : !layer[0];
  assign c_group     = g;
  assign c_col       = j;
  assign c_och       = o;
  assign wt_rd_och   = o_n;
  assign wt_rd_layer = layer_n;

endmodule
