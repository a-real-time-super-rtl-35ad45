// Activation block: requantisation and ReLU.
//
// The accumulator result (fixed point with out_shift fractional bits) is rounded to nearest by
// adding half an LSB and shifting right arithmetically by out_shift, passed through ReLU
// (negative values become 0) and saturated to the unsigned 8-bit range of the feature-map
// buffers.  For the last layer, which has no ReLU in the network, the same operation is the
// clip of the reconstructed image to valid pixel values, so one circuit serves all layers.
//
// Timing: one register stage; inputs in cycle t, outputs in cycle t+1.
// ReLU on layers 1-6 follows the paper; the paper does not describe how 8-bit feature maps are
// obtained from the wide accumulator, so the rounding shift and the saturation are this
// design's own choice.
module activation
  import sr_pkg::*;
#(
  parameter int unsigned N = PE_ROWS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  acc_t       in_sum [N],
  input  logic [4:0] out_shift,
  output logic       out_valid,
  output pix_t       out_pix [N]
);

  pix_t q_d [N];

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      acc_t rnd, v;
      rnd = (out_shift == 0) ? acc_t'(0) : (acc_t'(1) <<< (out_shift - 5'd1));
      v   = (in_sum[i] + rnd) >>> out_shift;
      if (v < 0)                 q_d[i] = '0;                  // ReLU
      else if (v > acc_t'(255))  q_d[i] = 8'd255;              // saturate
      else                       q_d[i] = v[DW-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) out_pix <= q_d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
