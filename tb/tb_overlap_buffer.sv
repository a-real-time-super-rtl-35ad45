// Testbench of overlap_buffer: plays the queue traffic of five tiles.  For tile t the input
// tile's last two columns are written to the input slot, then for each layer l = 1..7 the
// front slot is read and must hold layer l-1 of tile t-1, the layer's last two output columns
// are written to the back slot (l <= 6) and the front is popped.  Data are tagged with (tile,
// layer, column, row, channel), so any slot mix-up shows.  The front pointer must wrap.
module tb_overlap_buffer;
  import sr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pop = 0, rd_en = 0, rd_col = 0, wr_en = 0, wr_input = 0, wr_col = 0;
  logic [5:0] rd_row = 0, wr_row = 0;
  logic [3:0] front;
  chword_t rd_data, wr_data;
  int checks = 0, failures = 0, wraps = 0;

  overlap_buffer dut (.clk, .rst_n, .pop, .rd_en, .rd_col, .rd_row, .rd_data,
                      .wr_en, .wr_input, .wr_col, .wr_row, .wr_data, .front);

  function automatic chword_t tag(input int t, input int l, input int c, input int r);
    chword_t w;
    for (int i = 0; i < int'(MAX_CH); i++) w[i] = pix_t'(t * 61 + l * 23 + c * 11 + r * 3 + i);
    return w;
  endfunction

  task automatic write_cols(input bit inp, input int t, input int l);
    for (int c = 0; c < 2; c++)
      for (int r = 0; r < int'(TILE_R); r += 7) begin
        @(negedge clk); wr_en = 1; wr_input = inp; wr_col = c[0]; wr_row = 6'(r); wr_data = tag(t, l, c, r);
      end
    @(negedge clk); wr_en = 0;
  endtask

  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 5; t++) begin
      write_cols(1, t, 0);
      for (int l = 1; l <= int'(N_LAYERS); l++) begin
        if (t > 0)
          for (int c = 0; c < 2; c++)
            for (int r = 0; r < int'(TILE_R); r += 7) begin
              @(negedge clk); rd_en = 1; rd_col = c[0]; rd_row = 6'(r);
              @(negedge clk); rd_en = 0;
              checks++;
              if (rd_data != tag(t - 1, l - 1, c, r)) begin
                failures++;
                if (failures < 10) $display("FAIL tile %0d layer %0d col %0d row %0d", t, l, c, r);
              end
            end
        if (l < int'(N_LAYERS)) write_cols(0, t, l);
        @(negedge clk);
        if (front == 4'(OVL_SLOTS - 1)) wraps++;
        pop = 1;
        @(negedge clk); pop = 0;
      end
    end
    checks++;
    if (wraps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
