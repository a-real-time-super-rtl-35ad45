// Full-size testbench of the accelerator: one complete 640 x 360 frame (80 x 6 tiles plus the
// right-edge flush tiles) at the default configuration, with the input stream always valid.
// The whole frame must take no more than 10,000,000 cycles (600 MHz at 60 frames/s).
// Otherwise it is the end-to-end testbench at full frame size: pseudo-random weights, biases
// and pixels, and compares
// every output pixel with the reference model (tb/sr_ref_model.sv).  It also checks that each
// non-flush tile needs no more compute cycles than the real-time budget allows (600 MHz,
// 60 frames/s, 81 x 6 tiles per 640 x 360 frame: 20,576 cycles per tile, of which 480 are
// reserved for loading), and counts that every mechanism of the design happened: fetch
// stalls, window shifts hidden behind compute, overlap-buffer reads and queue wrap-around,
// ping-pong swaps both ways, residual and bias operands, flush tiles, strip changes, input
// stream gaps, ReLU and saturation.
module tb_sr_accel_full;
  import sr_pkg::*;
  import sr_ref_model::*;

  localparam int TX   = 80;
  localparam int SY   = 6;
  localparam int SEED = 5;
  localparam int GAP  = 0;      // input-stream gap probability, tenths
  localparam int W    = TX * int'(TILE_C);
  localparam int H    = SY * int'(TILE_R);
  localparam int TILE_BUDGET = 600_000_000 / 60 / (81 * 6);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       start = 1'b0, busy, done;
  logic [4:0] cfg_addend_shift [N_LAYERS];
  logic [4:0] cfg_out_shift    [N_LAYERS];
  logic       wt_we = 1'b0, bias_we = 1'b0;
  logic [7:0] wt_waddr = '0, bias_waddr = '0;
  wword_t     wt_wdata = '0;
  wgt_t       bias_wdata = '0;
  logic       in_valid = 1'b0, in_ready;
  pix_t       in_pix [IN_CH];
  logic       out_valid;
  logic [9:0] out_x;
  logic [8:0] out_y;
  logic [4:0] out_ch;
  pix_t       out_pix [PE_ROWS];

  sr_accel_top dut (
    .clk, .rst_n, .start, .cfg_tiles_x(7'(TX)), .cfg_strips(3'(SY)),
    .cfg_addend_shift, .cfg_out_shift, .busy, .done,
    .wt_we, .wt_waddr, .wt_wdata, .bias_we, .bias_waddr, .bias_wdata,
    .in_valid, .in_ready, .in_pix,
    .out_valid, .out_x, .out_y, .out_ch, .out_pix
  );

  int checks = 0, failures = 0;
  int got [H][W][OUT_CH];
  int n_out = 0, n_dup = 0, n_range = 0;

  // ---------------------------------------------------------------- output monitor
  always @(posedge clk)
    if (rst_n && out_valid) begin
      n_out++;
      for (int r = 0; r < int'(PE_ROWS); r++) begin
        int y, x;
        y = int'(out_y) + r; x = int'(out_x);
        if (y >= H || x >= W || int'(out_ch) >= int'(OUT_CH)) begin n_range++; $display("range: y=%0d x=%0d ch=%0d t=%0t", y, x, out_ch, $time); end
        else begin
          if (got[y][x][out_ch] >= 0) n_dup++;
          got[y][x][out_ch] = int'(out_pix[r]);
        end
      end
    end

  // ---------------------------------------------------------------- mechanism counters
  int m_stall, m_hidden_shift, m_ov_read, m_ov_wrap, m_swap01, m_swap10, m_res, m_bias;
  int m_flush, m_strip, m_gap, m_backpressure;
  logic swap_q;
  initial begin
    m_stall = 0; m_hidden_shift = 0; m_ov_read = 0; m_ov_wrap = 0; m_swap01 = 0;
    m_swap10 = 0; m_res = 0; m_bias = 0; m_flush = 0; m_strip = 0; m_gap = 0; m_backpressure = 0;
  end
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.st == dut.u_ctrl.S_COMP && dut.u_ctrl.need != 0 && !dut.fifo_nonempty) m_stall++;
    if (dut.win_shift && dut.c_valid) m_hidden_shift++;
    if (dut.ov_rd_en) m_ov_read++;
    if (dut.ov_pop && dut.ov_front == 4'(OVL_SLOTS - 1)) m_ov_wrap++;
    if (dut.c_valid && !swap_q && dut.pp_swap) m_swap01++;
    if (dut.c_valid && swap_q && !dut.pp_swap) m_swap10++;
    if (dut.c_valid) swap_q <= dut.pp_swap;
    if (dut.c_valid && int'(dut.layer) == N_LAYERS) m_res++;
    if (dut.c_valid && int'(dut.layer) <  N_LAYERS) m_bias++;
    if (dut.ld_we && dut.ld_zero) m_flush++;
    if (dut.res_clear && dut.busy && dut.u_ctrl.st == dut.u_ctrl.S_NEXT && !done) m_strip++;
    if (dut.in_ready && !in_valid) m_gap++;
    if (in_valid && !in_ready) m_backpressure++;
  end

  // ---------------------------------------------------------------- tile cycle budget
  localparam int FRAME_BUDGET = 600_000_000 / 60;
  int frame_cycles = 0;
  always @(posedge clk) if (busy) frame_cycles++;
  int tile_compute, max_tile_compute, n_tiles_timed;
  initial begin tile_compute = 0; max_tile_compute = 0; n_tiles_timed = 0; end
  always @(posedge clk) if (rst_n) begin
    if (dut.busy && dut.layer != '0) tile_compute++;
    if (dut.u_ctrl.st == dut.u_ctrl.S_NEXT) begin
      if (int'(dut.tile) < TX) begin
        n_tiles_timed++;
        if (tile_compute > max_tile_compute) max_tile_compute = tile_compute;
      end
      tile_compute = 0;
    end
  end

  // ---------------------------------------------------------------- watchdog
  initial begin
    repeat (SY * (TX + 1) * 40_000 + 20_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------------- stimulus
  initial begin
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int c = 0; c < int'(OUT_CH); c++)
      got[y][x][c] = -1;
    for (int l = 0; l < int'(N_LAYERS); l++) begin
      cfg_addend_shift[l] = 5'(addend_shift(l + 1));
      cfg_out_shift[l]    = 5'(out_shift(l + 1));
    end
    for (int c = 0; c < int'(IN_CH); c++) in_pix[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // weights and biases
    for (int l = 1; l <= int'(N_LAYERS); l++)
      for (int o = 0; o < int'(MAX_CH); o++) begin
        wword_t wd;
        for (int i = 0; i < int'(MAX_CH); i++)
          for (int k = 0; k < 3; k++)
            for (int d = 0; d < 3; d++) wd[i][k][d] = wgt_t'(weight(SEED, l, o, i, k, d));
        @(negedge clk);
        wt_we = 1'b1; wt_waddr = 8'((l - 1) * int'(MAX_CH) + o); wt_wdata = wd;
        if (l < int'(N_LAYERS)) begin
          bias_we = 1'b1; bias_waddr = 8'((l - 1) * int'(MAX_CH) + o);
          bias_wdata = wgt_t'(bias(SEED, l, o));
        end else bias_we = 1'b0;
      end
    @(negedge clk);
    wt_we = 1'b0; bias_we = 1'b0;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    // input stream: strip, tile, column, row
    for (int s = 0; s < SY; s++)
      for (int t = 0; t < TX; t++)
        for (int c = 0; c < int'(TILE_C); c++)
          for (int r = 0; r < int'(TILE_R); r++) begin
            while ($urandom_range(0, 9) < GAP) begin   // random gap
              in_valid = 1'b0;
              @(negedge clk);
            end
            in_valid = 1'b1;
            for (int k = 0; k < int'(IN_CH); k++)
              in_pix[k] = pix_t'(pixel(SEED, s * int'(TILE_R) + r, t * int'(TILE_C) + c, k));
            @(posedge clk);
            while (!in_ready) @(posedge clk);
            @(negedge clk);
            in_valid = 1'b0;
          end
  end

  initial begin
    int sat_total, relu_total;
    sat_total = 0; relu_total = 0;
    @(posedge rst_n);
    @(posedge done);
    repeat (10) @(posedge clk);
    for (int s = 0; s < SY; s++) begin
      run_strip(SEED, s, W);
      sat_total += n_sat; relu_total += n_relu;
      for (int y = 0; y < int'(TILE_R); y++)
        for (int x = 0; x < W; x++)
          for (int c = 0; c < int'(OUT_CH); c++)
            check(got[s * int'(TILE_R) + y][x][c] == res[c][y][x],
                  $sformatf("pixel y=%0d x=%0d ch=%0d got %0d expected %0d",
                            s * int'(TILE_R) + y, x, c, got[s * int'(TILE_R) + y][x][c], res[c][y][x]));
    end
    check(n_dup == 0,   $sformatf("%0d duplicate outputs", n_dup));
    check(n_range == 0, $sformatf("%0d outputs outside the image", n_range));
    check(max_tile_compute <= TILE_BUDGET - int'(TILE_R * TILE_C),
          $sformatf("tile compute cycles %0d above budget", max_tile_compute));
    check(n_tiles_timed == SY * TX, "tile count");
    check(m_stall > 0,        "no fetch stall seen");
    check(m_hidden_shift > 0, "no window shift hidden behind compute");
    check(m_ov_read > 0,      "no overlap-buffer read");
    check(m_ov_wrap > 0,      "overlap queue never wrapped");
    check(m_swap01 > 0 && m_swap10 > 0, "ping-pong roles never swapped both ways");
    check(m_res > 0,          "no residual operand");
    check(m_bias > 0,         "no bias operand");
    check(m_flush > 0,        "no flush-tile column");
    check(m_strip > 0,        "no strip change");
    check(m_gap > 0 || GAP == 0, "no input-stream gap");
    check(frame_cycles <= FRAME_BUDGET || GAP != 0,
          $sformatf("frame took %0d cycles, budget %0d", frame_cycles, FRAME_BUDGET));
    check(sat_total > 0,      "no saturation exercised");
    check(relu_total > 0,     "no ReLU exercised");
    $display("outputs=%0d stall=%0d hidden_shift=%0d ov_read=%0d ov_wrap=%0d swaps=%0d/%0d res=%0d bias=%0d flush=%0d strip=%0d gap=%0d sat=%0d relu=%0d",
             n_out, m_stall, m_hidden_shift, m_ov_read, m_ov_wrap, m_swap01, m_swap10, m_res,
             m_bias, m_flush, m_strip, m_gap, sat_total, relu_total);
    $display("frame cycles %0d", frame_cycles);
    $display("max compute cycles per tile %0d (budget %0d incl. 480 load)", max_tile_compute, TILE_BUDGET);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
