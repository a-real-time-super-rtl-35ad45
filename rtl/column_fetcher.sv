// Column fetcher: reads the input columns of one layer of a tile into a small column FIFO.
//
// For layer l of tile t, every row group g (rows 5g-1 .. 5g+5, i.e. WIN_ROWS = 7 rows) needs
// IN_COLS = 10 input columns: columns 0-1 come from the front slot of the overlap buffer (the
// last two columns of layer l-1 of the previous tile), columns 2-9 from the ping-pong buffer
// that holds layer l-1 of this tile.  Input column c lies at image column 8t - l - 1 + c.
// A row outside the tile (row -1 or 60) or a column outside the image reads as zero, which is
// the zero padding of the convolution; nothing is read from memory for it.
// The fetcher issues one row read per cycle, assembles the 7 rows of a column and pushes the
// column into a FIFO of FIFO_DEPTH columns.  A column is started only when it is sure to find
// room (a credit counter counts columns queued or being assembled), so the fetcher runs ahead of
// the compute schedule and its reads are hidden behind the 27-28 compute cycles of a column.
//
// Interface: start (one cycle, with layer, tile, tiles_x), pop (consumer takes the head),
// head / nonempty; two read ports to the buffers (synchronous, one-cycle latency).
// This unit is not described in the paper; it is this design's way of delivering the
// broadcast input columns (7 pixels x 28 channels) to the PE blocks.
// Lint reports rst_n as used synchronously only because the FIFO assertion names it in its
// disable condition; all flops reset asynchronously.
module column_fetcher
  import sr_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 3
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  layer_t     layer,       // 1..N_LAYERS, layer being computed
  input  logic [6:0] tile,        // tile index within the strip
  input  logic [6:0] tiles_x,     // image width / TILE_C
  // consumer side
  input  logic       pop,
  output wincol_t    head,
  output logic       nonempty,
  // ping-pong buffer read port
  output logic       pp_rd_en,
  output logic [3:0] pp_rd_col,
  output logic [5:0] pp_rd_row,
  input  chword_t    pp_rd_data,
  // overlap buffer read port
  output logic       ov_rd_en,
  output logic       ov_rd_col,
  output logic [5:0] ov_rd_row,
  input  chword_t    ov_rd_data
);

  // ---- sequence counters ---------------------------------------------------------------
  logic       active;
  logic [3:0] g, c;
  logic [2:0] r;
  layer_t     lay_q;
  logic [6:0] tile_q, tx_q;
  logic [$clog2(FIFO_DEPTH+1)-1:0] reserved;

  int  x, y;
  logic in_col, can_start, issue;

  assign x        = int'(tile_q) * TILE_C - int'(lay_q) - 1 + int'(c);
  assign y        = int'(g) * PE_ROWS - 1 + int'(r);
  assign in_col   = (r != 0);                         // in the middle of a column
  assign can_start = (int'(reserved) < int'(FIFO_DEPTH));
  assign issue    = active && (in_col || can_start);

  logic zero;
  assign zero = (x < 0) || (x >= int'(tx_q) * TILE_C) || (y < 0) || (y >= int'(TILE_R));

  assign pp_rd_en  = issue && !zero && (int'(c) >= int'(OVL_COLS));
  assign pp_rd_col = 4'(int'(c) - OVL_COLS);
  assign pp_rd_row = 6'(y);
  assign ov_rd_en  = issue && !zero && (int'(c) < int'(OVL_COLS));
  assign ov_rd_col = c[0];
  assign ov_rd_row = 6'(y);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      g <= '0; c <= '0; r <= '0;
      lay_q <= '0; tile_q <= '0; tx_q <= '0;
    end else if (start) begin
      active <= 1'b1;
      g <= '0; c <= '0; r <= '0;
      lay_q <= layer; tile_q <= tile; tx_q <= tiles_x;
    end else if (issue) begin
      if (r == 3'(WIN_ROWS - 1)) begin
        r <= '0;
        if (c == 4'(IN_COLS - 1)) begin
          c <= '0;
          if (g == 4'(N_GROUPS - 1)) active <= 1'b0;
          else g <= g + 4'd1;
        end else c <= c + 4'd1;
      end else r <= r + 3'd1;
    end
  end

  // ---- capture stage ---------------------------------------------------------------------
  logic       cap_v, cap_zero, cap_ov, cap_last;
  logic [2:0] cap_r;
  chword_t    asm_q [WIN_ROWS-1];
  chword_t    cap_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cap_v <= 1'b0;
    else        cap_v <= issue && !start;
  end

  always_ff @(posedge clk) begin
    cap_zero <= zero;
    cap_ov   <= (int'(c) < int'(OVL_COLS));
    cap_r    <= r;
    cap_last <= (r == 3'(WIN_ROWS - 1));
  end

  assign cap_data = cap_zero ? '0 : (cap_ov ? ov_rd_data : pp_rd_data);

  always_ff @(posedge clk)
    if (cap_v && !cap_last) asm_q[cap_r] <= cap_data;

  // ---- column FIFO -------------------------------------------------------------------------
  wincol_t fifo [FIFO_DEPTH];
  logic [$clog2(FIFO_DEPTH)-1:0] wp, rp;
  logic [$clog2(FIFO_DEPTH+1)-1:0] count;
  logic push;

  assign push     = cap_v && cap_last;
  assign nonempty = (count != 0);
  assign head     = fifo[rp];

  function automatic logic [$clog2(FIFO_DEPTH)-1:0] inc(input logic [$clog2(FIFO_DEPTH)-1:0] p);
    return (int'(p) == int'(FIFO_DEPTH) - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) begin
      wincol_t col;
      for (int i = 0; i < int'(WIN_ROWS) - 1; i++) col[i] = asm_q[i];
      col[WIN_ROWS-1] = cap_data;
      fifo[wp] <= col;
    end
  end

  logic col_start;
  assign col_start = issue && !in_col;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0; reserved <= '0;
    end else if (start) begin
      wp <= '0; rp <= '0; count <= '0; reserved <= '0;
    end else begin
      if (push) wp <= inc(wp);
      if (pop)  rp <= inc(rp);
      count    <= count + $bits(count)'(push) - $bits(count)'(pop);
      reserved <= reserved + $bits(reserved)'(col_start) - $bits(reserved)'(pop);
    end
  end

  // a pop of an empty FIFO is a schedule error
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> nonempty)
    else $error("column FIFO popped while empty");

endmodule
