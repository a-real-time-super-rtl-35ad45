// Bias SRAM: one 8-bit signed bias per output channel of layers 1-6 (6 x 28 = 168 bytes).
//
// The last layer has no entry: its accumulator operand is the residual instead.  Address =
// (layer - 1) * MAX_CH + output channel.  A read for the last layer returns 0.
// Timing: synchronous read, data one cycle after rd_en.  The 168-byte size follows the paper;
// the address map is this design's.
module bias_sram
  import sr_pkg::*;
#(
  parameter int unsigned DEPTH = (N_LAYERS - 1) * MAX_CH
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  wgt_t                     wr_data,
  input  logic                     rd_en,
  input  layer_t                   rd_layer,   // 1..N_LAYERS
  input  logic [4:0]               rd_och,
  output wgt_t                     rd_data
);

  wgt_t mem [DEPTH];
  int   ra;

  assign ra = (int'(rd_layer) - 1) * int'(MAX_CH) + int'(rd_och);

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= (ra < int'(DEPTH)) ? mem[$clog2(DEPTH)'(ra)] : '0;
  end

endmodule
