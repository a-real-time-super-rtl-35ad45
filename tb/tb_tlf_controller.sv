// Testbench of tlf_controller: a frame of 2 x 1 tiles (plus the flush tile) with an input
// stream that is always valid, a column FIFO that is never empty and an idle pipeline.
// Checks: 480 load writes per tile, columns beyond the image flagged as zero and not taken
// from the stream; per layer the compute cycles visit (group, column, channel) in order, 28
// channels (27 for the last layer); the weight address of each cycle is the channel of the next
// compute cycle; ping-pong roles follow layer parity; 7 overlap pops per tile; residual
// pointer advanced / cleared; and the exact cycle count of a tile:
//   480 + sum over layers of (1 start + 3 window shifts + 96 x channels + 11 x 2 group shifts
//   + 1 drain) + 1.
module tb_tlf_controller;
  import sr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int TX = 2;

  logic start = 0, busy, done, in_valid = 1, in_ready, ld_we, ld_zero;
  logic [3:0] ld_col, c_group;
  logic [5:0] ld_row;
  layer_t layer, wt_rd_layer;
  logic [6:0] tile, tiles_x;
  logic [2:0] strip, c_col;
  logic pp_swap, ov_pop, res_clear, res_advance, fetch_start, win_shift, c_valid, c_last_och;
  logic [4:0] c_och, wt_rd_och;
  int checks = 0, failures = 0;

  tlf_controller dut (
    .clk, .rst_n, .start, .cfg_tiles_x(7'(TX)), .cfg_strips(3'd1), .busy, .done,
    .in_valid, .in_ready, .ld_we, .ld_col, .ld_row, .ld_zero,
    .layer, .tile, .strip, .tiles_x, .pp_swap, .ov_pop, .res_clear, .res_advance,
    .fetch_start, .fifo_nonempty(1'b1), .win_shift,
    .c_valid, .c_group, .c_col, .c_och, .c_last_och, .wt_rd_och, .wt_rd_layer,
    .pipe_idle(1'b1)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // expected sequence of compute cycles
  int exp_g, exp_j, exp_o, cur_layer, pops, loads, zeros, stream, advances, tile_cycles;
  logic [4:0] prev_wt;
  logic prev_v;
  int expected_tile, tiles_seen;

  initial begin
    expected_tile = 480 + 1;
    for (int l = 1; l <= int'(N_LAYERS); l++)
      expected_tile += 1 + 3 + int'(N_GROUPS * TILE_C) * int'(layer_och(l)) + (int'(N_GROUPS) - 1) * 2 + 1;
  end

  always @(posedge clk) if (rst_n) begin
    if (busy) tile_cycles++;
    if (ld_we && ld_col == 0 && ld_row == 0) begin
      if (tiles_seen > 0)
        check(tile_cycles == expected_tile, $sformatf("tile cycles %0d expected %0d", tile_cycles, expected_tile));
      tiles_seen++;
      tile_cycles = 0;
    end
    if (fetch_start) begin
      cur_layer = int'(layer); exp_g = 0; exp_j = 0; exp_o = 0;
      check(pp_swap == !layer[0], "ping-pong role at layer start");
    end
    if (prev_v && c_valid) check(prev_wt == c_och, "weight address one cycle ahead");
    prev_v = 1'b0;
    if (c_valid) begin
      check(int'(layer) == cur_layer && int'(c_group) == exp_g && int'(c_col) == exp_j && int'(c_och) == exp_o,
            $sformatf("order: l%0d g%0d j%0d o%0d expected g%0d j%0d o%0d", layer, c_group, c_col, c_och, exp_g, exp_j, exp_o));
      check(c_last_och == (exp_o == int'(layer_och(cur_layer)) - 1), "last channel flag");
      check(wt_rd_layer == layer || exp_o == int'(layer_och(cur_layer)) - 1, "weight layer");
      prev_wt = wt_rd_och; prev_v = 1'b1;
      exp_o++;
      if (exp_o == int'(layer_och(cur_layer))) begin
        exp_o = 0; exp_j++;
        if (exp_j == int'(TILE_C)) begin exp_j = 0; exp_g++; end
      end
    end
    if (ov_pop) begin
      check(exp_g == int'(N_GROUPS), "pop after all groups");
      pops++;
    end
    if (ld_we) begin
      loads++;
      if (ld_zero) zeros++;
      check(pp_swap == 1'b1, "input written to the left buffer");
      check(ld_zero == (int'(tile) >= TX), "zero flag only in the flush tile");
    end
    if (in_ready && in_valid) stream++;
    if (res_advance) advances++;
    if ((res_advance || res_clear) && busy) begin
      check(pops == 7 && loads == 480, $sformatf("tile pops %0d loads %0d", pops, loads));
      pops = 0; loads = 0;
    end
  end

  initial begin
    int t0;
    tiles_seen = 0; pops = 0; loads = 0; zeros = 0; stream = 0; advances = 0; tile_cycles = 0; prev_v = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    @(posedge done);
    check(zeros == 480, $sformatf("flush-tile zero columns %0d", zeros));
    check(stream == TX * 480, $sformatf("stream pixels taken %0d", stream));
    check(advances == TX, "residual pointer advances");
    check(tiles_seen == TX + 1, "tiles started");
    @(posedge clk); @(negedge clk);
    check(!busy, "idle after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
