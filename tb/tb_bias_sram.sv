// Testbench of bias_sram: writes the 168 biases of layers 1-6, reads them back by (layer,
// channel) one cycle after the read, and checks that the last layer reads 0.
module tb_bias_sram;
  import sr_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [7:0] wr_addr = 0;
  wgt_t wr_data = 0, rd_data;
  layer_t rd_layer = 1;
  logic [4:0] rd_och = 0;
  int ref_mem [(N_LAYERS - 1) * MAX_CH];
  int checks = 0, failures = 0;

  bias_sram dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_layer, .rd_och, .rd_data);

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int a = 0; a < int'((N_LAYERS - 1) * MAX_CH); a++) begin
      ref_mem[a] = int'($urandom_range(1, 255)) - 128;
      @(negedge clk); wr_en = 1; wr_addr = 8'(a); wr_data = wgt_t'(ref_mem[a]);
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 800; n++) begin
      int l, o, e;
      l = $urandom_range(1, N_LAYERS); o = $urandom_range(0, MAX_CH - 1);
      e = (l == int'(N_LAYERS)) ? 0 : ref_mem[(l - 1) * int'(MAX_CH) + o];
      @(negedge clk); rd_en = 1; rd_layer = layer_t'(l); rd_och = 5'(o);
      @(negedge clk); rd_en = 0;
      checks++;
      if (int'(rd_data) != e) begin
        failures++;
        if (failures < 10) $display("FAIL layer %0d och %0d got %0d exp %0d", l, o, rd_data, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
