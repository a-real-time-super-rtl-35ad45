// PE block: three PE arrays working on one input channel.
//
// Array k receives input column k of the sliding 3-column window (7 rows each) and kernel
// column k of the 3x3 filter of this input channel, so that the three arrays together produce
// every product of one 3x3 convolution for five vertically adjacent outputs in one cycle
// (array 1 computes A x WA, array 2 B x WB, array 3 C x WC for output column OA).  The three
// 5-entry partial-sum vectors are handed to the accumulator separately: the paper adds them
// there, in its first pipeline stage.
//
// Interface: win[k][r] pixel of window column k, row r; w[k][dy] weight of kernel column k,
// row dy; psum[k][r] partial sum of array k for output row r.  Combinational.
module pe_block
  import sr_pkg::*;
(
  input  pix_t  win  [K][WIN_ROWS],
  input  wgt_t  w    [K][K],
  output psum_t psum [K][PE_ROWS]
);

  for (genvar k = 0; k < K; k++) begin : g_arr
    pe_array u_arr (
      .in_pix (win[k]),
      .w      (w[k]),
      .psum   (psum[k])
    );
  end

endmodule
