// Weight SRAM: all 3x3 convolution weights of the seven layers, 8-bit signed.
//
// One word holds every weight needed in one compute cycle: the 3x3 kernel of one output channel
// for all MAX_CH input channels (28 x 9 bytes), laid out [input channel][kernel column][kernel
// row].  Word address = (layer - 1) * MAX_CH + output channel.  Layer 1 has only three input
// channels; its words carry zeros for input channels 3..27, so the unused PE blocks add nothing.
// Words are written one at a time from the external memory before a frame is processed.
//
// Timing: synchronous read, data one cycle after rd_en.  Single write port, independent of the
// read port.  Keeping the weights on chip follows the paper; the word layout and the padded
// first layer (7 x 28 words of 252 bytes = 49.4 KB, against the 42.54 KB the paper quotes for a
// densely packed array) are this design's choice.
module weight_sram
  import sr_pkg::*;
#(
  parameter int unsigned DEPTH = N_LAYERS * MAX_CH
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  wword_t                   wr_data,
  input  logic                     rd_en,
  input  layer_t                   rd_layer,   // 1..N_LAYERS
  input  logic [4:0]               rd_och,
  output wword_t                   rd_data
);

  wword_t mem [DEPTH];
  logic [$clog2(DEPTH)-1:0] ra;

  assign ra = $clog2(DEPTH)'((int'(rd_layer) - 1) * int'(MAX_CH) + int'(rd_och));

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[ra];
  end

endmodule
