// Testbench of pingpong_buffer: fills the left buffer (swap = 1) and the right buffer
// (swap = 0) with different data at every position, then reads every position through both
// roles and checks that swap = 0 returns the left contents and swap = 1 the right contents,
// one cycle after the read; finally a layer-like pass reads one buffer while writing the other.
module tb_pingpong_buffer;
  import sr_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic swap = 0, rd_en = 0, wr_en = 0;
  logic [3:0] rd_col = 0, wr_col = 0;
  logic [5:0] rd_row = 0, wr_row = 0;
  chword_t rd_data, wr_data;
  int checks = 0, failures = 0;

  pingpong_buffer dut (.clk, .swap, .rd_en, .rd_col, .rd_row, .rd_data,
                       .wr_en, .wr_col, .wr_row, .wr_data);

  function automatic chword_t pat(input int side, input int c, input int r, input int gen);
    chword_t w;
    for (int i = 0; i < int'(MAX_CH); i++) w[i] = pix_t'(side * 101 + c * 17 + r * 3 + i * 5 + gen * 29);
    return w;
  endfunction

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic rd_check(input int s, input int c, input int r, input chword_t e);
    @(negedge clk); swap = s[0]; rd_en = 1; wr_en = 0; rd_col = 4'(c); rd_row = 6'(r);
    @(negedge clk); rd_en = 0;
    checks++;
    if (rd_data != e) begin
      failures++;
      if (failures < 10) $display("FAIL swap %0d col %0d row %0d", s, c, r);
    end
  endtask

  initial begin
    for (int side = 0; side < 2; side++)      // side 0 = left (written with swap = 1)
      for (int c = 0; c < int'(TILE_C); c++)
        for (int r = 0; r < int'(TILE_R); r++) begin
          @(negedge clk);
          swap = (side == 0); wr_en = 1; wr_col = 4'(c); wr_row = 6'(r); wr_data = pat(side, c, r, 0);
        end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 300; n++) begin
      int c, r;
      c = $urandom_range(0, TILE_C - 1); r = $urandom_range(0, TILE_R - 1);
      rd_check(0, c, r, pat(0, c, r, 0));
      rd_check(1, c, r, pat(1, c, r, 0));
    end
    // simultaneous read of the left buffer and write of the right one
    for (int c = 0; c < int'(TILE_C); c++)
      for (int r = 0; r < int'(TILE_R); r++) begin
        @(negedge clk);
        swap = 0; rd_en = 1; rd_col = 4'(c); rd_row = 6'(r);
        wr_en = 1; wr_col = 4'(c); wr_row = 6'(r); wr_data = pat(1, c, r, 1);
        @(negedge clk); rd_en = 0; wr_en = 0;
        checks++;
        if (rd_data != pat(0, c, r, 0)) failures++;
      end
    for (int n = 0; n < 100; n++) begin
      int c, r;
      c = $urandom_range(0, TILE_C - 1); r = $urandom_range(0, TILE_R - 1);
      rd_check(1, c, r, pat(1, c, r, 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
