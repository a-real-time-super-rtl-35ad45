// Testbench of residual_sram: plays the access pattern of a strip of 6 tiles.  For tile t it
// writes input columns 8t..8t+7 (all row groups, three colours), then reads, as the last layer
// does, output columns j = 0..7, i.e. image columns 8t-7+j, and compares with the image.
// After the strip it clears the pointer and repeats with a new image to check the restart.
module tb_residual_sram;
  import sr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, advance = 0, wr_en = 0, rd_en = 0;
  logic [3:0] wr_col = 0, wr_group = 0, rd_col = 0, rd_group = 0;
  logic [1:0] rd_color = 0;
  pix_t wr_data [PE_ROWS][IN_CH];
  pix_t rd_data [PE_ROWS];
  int checks = 0, failures = 0;

  residual_sram dut (.clk, .rst_n, .clear, .advance, .wr_en, .wr_col, .wr_group, .wr_data,
                     .rd_en, .rd_col, .rd_group, .rd_color, .rd_data);

  function automatic int pix(input int strip, input int y, input int x, input int c);
    return (strip * 97 + y * 31 + x * 7 + c * 53 + (x * y) % 13) % 256;
  endfunction

  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int r = 0; r < int'(PE_ROWS); r++) for (int c = 0; c < int'(IN_CH); c++) wr_data[r][c] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 2; s++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int t = 0; t < 6; t++) begin
        for (int c = 0; c < int'(TILE_C); c++)
          for (int g = 0; g < int'(N_GROUPS); g++) begin
            @(negedge clk);
            wr_en = 1; wr_col = 4'(c); wr_group = 4'(g);
            for (int r = 0; r < int'(PE_ROWS); r++) for (int k = 0; k < int'(IN_CH); k++)
              wr_data[r][k] = pix_t'(pix(s, g * int'(PE_ROWS) + r, t * int'(TILE_C) + c, k));
          end
        @(negedge clk); wr_en = 0;
        for (int j = 0; j < int'(TILE_C); j++)
          for (int g = 0; g < int'(N_GROUPS); g++)
            for (int k = 0; k < int'(IN_CH); k++) begin
              int x;
              x = t * int'(TILE_C) - int'(N_LAYERS) + j;
              @(negedge clk); rd_en = 1; rd_col = 4'(j); rd_group = 4'(g); rd_color = 2'(k);
              @(negedge clk); rd_en = 0;
              if (x >= 0)
                for (int r = 0; r < int'(PE_ROWS); r++) begin
                  checks++;
                  if (int'(rd_data[r]) != pix(s, g * int'(PE_ROWS) + r, x, k)) begin
                    failures++;
                    if (failures < 10) $display("FAIL s%0d t%0d j%0d g%0d c%0d r%0d", s, t, j, g, k, r);
                  end
                end
            end
        @(negedge clk); advance = 1; @(negedge clk); advance = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
