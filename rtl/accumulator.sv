// Two-stage pipelined accumulator.
//
// Input: the partial sums of all N_BLK PE blocks (3 arrays x 5 rows each) for one output
// channel.  A register bank captures them (the DFF column at the left of the paper's figure).
//   Stage 1: the three array sums of each block are added (one adder per block and row), then
//            a first partial tree adder reduces the N_BLK block sums to N_PART sums per row.
//   Stage 2: a second partial tree adder reduces the N_PART sums and adds one operand chosen by
//            a multiplexer: the bias of the output channel (layers 1-6) or the input pixel used
//            as residual (last layer).  The chosen operand is registered beside stage 1.
// Both operands are scaled to the accumulator's fixed point by an arithmetic left shift of
// addend_shift bits.
//
// Timing: in_valid / psum / in_sel_res / in_addend_shift in cycle t, bias / res (the
// synchronous-read data of the bias and residual SRAMs) in cycle t+1, result in cycle t+3.
// The two-stage split, the block-wise 3-input add, the two partial tree adders and the
// bias/residual multiplexer follow the paper; the width, the 4-way split of the tree and the
// operand shift are this design's choice.
module accumulator
  import sr_pkg::*;
#(
  parameter int unsigned N_BLK  = MAX_CH,
  parameter int unsigned N_PART = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  psum_t        psum [N_BLK][K][PE_ROWS],
  input  logic         in_sel_res,       // 1: add residual, 0: add bias
  input  logic [4:0]   in_addend_shift,
  input  wgt_t         bias,             // one cycle after in_valid
  input  pix_t         res  [PE_ROWS],   // one cycle after in_valid
  output logic         out_valid,
  output acc_t         out_sum [PE_ROWS]
);

  localparam int unsigned PER_PART = (N_BLK + N_PART - 1) / N_PART;

  // ---- input register bank (DFFs after the PE arrays) ------------------------------
  psum_t      ps_q [N_BLK][K][PE_ROWS];
  logic       v0_q, sel0_q;
  logic [4:0] sh0_q;

  always_ff @(posedge clk) begin
    if (in_valid) ps_q <= psum;
    sel0_q <= in_sel_res;
    sh0_q  <= in_addend_shift;
  end

  // ---- stage 1: 3-input add per block, first partial tree ---------------------------
  acc_t part_d [N_PART][PE_ROWS];
  acc_t part_q [N_PART][PE_ROWS];
  acc_t addend_q [PE_ROWS];
  logic v1_q;

  always_comb begin
    for (int p = 0; p < int'(N_PART); p++)
      for (int r = 0; r < int'(PE_ROWS); r++) begin
        part_d[p][r] = '0;
        for (int b = p * int'(PER_PART); b < (p + 1) * int'(PER_PART); b++)
          if (b < int'(N_BLK))
            part_d[p][r] += acc_t'(ps_q[b][0][r]) + acc_t'(ps_q[b][1][r]) + acc_t'(ps_q[b][2][r]);
      end
  end

  always_ff @(posedge clk) begin
    part_q <= part_d;
    for (int r = 0; r < int'(PE_ROWS); r++) begin
      // multiplexer between bias and residual, then the operand register
      addend_q[r] <= (sel0_q ? acc_t'({1'b0, res[r]}) : acc_t'(bias)) <<< sh0_q;
    end
  end

  // ---- stage 2: second partial tree plus operand -----------------------------------
  always_ff @(posedge clk) begin
    for (int r = 0; r < int'(PE_ROWS); r++) begin
      acc_t s;
      s = addend_q[r];
      for (int p = 0; p < int'(N_PART); p++) s += part_q[p][r];
      out_sum[r] <= s;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0_q      <= 1'b0;
      v1_q      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v0_q      <= in_valid;
      v1_q      <= v0_q;
      out_valid <= v1_q;
    end
  end

endmodule
