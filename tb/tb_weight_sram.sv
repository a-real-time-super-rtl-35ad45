// Testbench of weight_sram: writes all 196 words with random data, then reads every
// (layer, output channel) pair in random order and checks the word of address
// (layer - 1) * 28 + channel arrives one cycle after the read.
module tb_weight_sram;
  import sr_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [7:0] wr_addr = 0;
  wword_t wr_data, rd_data;
  layer_t rd_layer = 1;
  logic [4:0] rd_och = 0;
  wword_t ref_mem [N_LAYERS * MAX_CH];
  int checks = 0, failures = 0;

  weight_sram dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_layer, .rd_och, .rd_data);

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int a = 0; a < int'(N_LAYERS * MAX_CH); a++) begin
      wword_t d;
      for (int i = 0; i < int'(MAX_CH); i++) for (int k = 0; k < 3; k++) for (int j = 0; j < 3; j++)
        d[i][k][j] = wgt_t'($urandom);
      ref_mem[a] = d;
      @(negedge clk); wr_en = 1; wr_addr = 8'(a); wr_data = d;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 600; n++) begin
      int l, o;
      l = $urandom_range(1, N_LAYERS); o = $urandom_range(0, MAX_CH - 1);
      @(negedge clk); rd_en = 1; rd_layer = layer_t'(l); rd_och = 5'(o);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data != ref_mem[(l - 1) * int'(MAX_CH) + o]) begin
        failures++;
        if (failures < 10) $display("FAIL layer %0d och %0d", l, o);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
