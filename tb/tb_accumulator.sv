// Testbench of accumulator: random partial sums of all 28 PE blocks, random bias / residual
// operands and shifts, a new input every cycle.  The result must appear exactly three cycles
// after the input and equal the sum of all 28 x 3 partial sums of each row plus the selected
// operand shifted left.  The bias and residual are presented one cycle after the partial sums,
// as the synchronous SRAMs deliver them.
module tb_accumulator;
  import sr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       in_valid = 0, in_sel_res = 0, out_valid;
  logic [4:0] in_addend_shift = 0;
  psum_t      psum [MAX_CH][K][PE_ROWS];
  wgt_t       bias;
  pix_t       res [PE_ROWS];
  acc_t       out_sum [PE_ROWS];
  int checks = 0, failures = 0;
  longint exp_q [$];
  int lat_q [$];
  int cyc = 0;
  int n_res = 0, n_bias = 0;

  accumulator dut (.clk, .rst_n, .in_valid, .psum, .in_sel_res, .in_addend_shift,
                   .bias, .res, .out_valid, .out_sum);

  always @(posedge clk) cyc++;

  initial begin
    repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    int t0;
    t0 = lat_q.pop_front();
    checks++;
    if (cyc - t0 != 3) begin failures++; $display("FAIL latency %0d", cyc - t0); end
    for (int r = 0; r < int'(PE_ROWS); r++) begin
      longint e;
      e = exp_q.pop_front();
      checks++;
      if (longint'(out_sum[r]) != e) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d got %0d exp %0d", r, out_sum[r], e);
      end
    end
  end

  initial begin
    bit     sel_d;
    int     sh_d;
    longint base [PE_ROWS];
    bit     v_d;
    v_d = 0;
    bias = '0;
    for (int r = 0; r < int'(PE_ROWS); r++) res[r] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      // operands of the previous cycle's input
      bias = wgt_t'($urandom);
      for (int r = 0; r < int'(PE_ROWS); r++) res[r] = pix_t'($urandom);
      if (v_d)
        for (int r = 0; r < int'(PE_ROWS); r++)
          exp_q.push_back(base[r] + ((sel_d ? longint'(res[r]) : longint'(bias)) <<< sh_d));
      // new input
      in_valid        = (n < 590) && ($urandom_range(0, 4) != 0);
      in_sel_res      = $urandom_range(0, 1);
      in_addend_shift = 5'($urandom_range(0, 8));
      for (int r = 0; r < int'(PE_ROWS); r++) base[r] = 0;
      for (int b = 0; b < int'(MAX_CH); b++)
        for (int k = 0; k < int'(K); k++)
          for (int r = 0; r < int'(PE_ROWS); r++) begin
            psum[b][k][r] = psum_t'($signed($urandom_range(0, 200000)) - 100000);
            base[r] += longint'(psum[b][k][r]);
          end
      if (in_valid) begin
        lat_q.push_back(cyc);
        if (in_sel_res) n_res++; else n_bias++;
      end
      v_d = in_valid; sel_d = in_sel_res; sh_d = int'(in_addend_shift);
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++; if (exp_q.size() != 0 || n_res == 0 || n_bias == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
