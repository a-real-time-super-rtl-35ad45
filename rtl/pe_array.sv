// PE array: 5 x 3 multipliers arranged as a parallelogram (input broadcasting).
//
// One column of WIN_ROWS (= OUT_ROWS + K - 1 = 7) input pixels is broadcast along the rows
// and one column of K (= 3) weights is broadcast along the columns.  MAC (r, k) multiplies
// input row r + k by weight k; the K products on the diagonal of output r are chained into one
// partial sum:  psum[r] = sum_k in[r + k] * w[k].  With three such arrays fed with three
// consecutive input columns and the three kernel columns, one column of 3x3 convolution
// outputs is complete every cycle.
//
// Interface: in_pix  unsigned pixels (row 0 on top), w signed weights (kernel row 0 first),
// psum signed partial sums.  Purely combinational; the accumulator registers the result.
// The geometry (5 x 3 MACs, diagonal summation, 7 broadcast inputs) follows the paper;
// the 8-bit unsigned activation and signed weight formats are this design's choice.
module pe_array
  import sr_pkg::*;
#(
  parameter int unsigned OUT_ROWS = PE_ROWS,
  parameter int unsigned KS       = K
) (
  input  pix_t  in_pix [OUT_ROWS+KS-1],
  input  wgt_t  w      [KS],
  output psum_t psum   [OUT_ROWS]
);

  always_comb begin
    for (int r = 0; r < int'(OUT_ROWS); r++) begin
      psum_t acc;
      acc = '0;
      for (int k = 0; k < int'(KS); k++)
        acc += psum_t'($signed({1'b0, in_pix[r+k]}) * w[k]);
      psum[r] = acc;
    end
  end

endmodule
