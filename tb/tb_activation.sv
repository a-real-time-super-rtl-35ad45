// Testbench of activation: random accumulator values and shifts; the output one cycle later
// must be round-to-nearest(value / 2^shift), with negative results set to 0 (ReLU) and values
// above 255 saturated.
module tb_activation;
  import sr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  acc_t in_sum [PE_ROWS];
  logic [4:0] out_shift = 0;
  pix_t out_pix [PE_ROWS];
  int checks = 0, failures = 0;
  int exp_q [$];
  int n_neg = 0, n_sat = 0;

  activation dut (.clk, .rst_n, .in_valid, .in_sum, .out_shift, .out_valid, .out_pix);

  initial begin
    repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int model(input longint v, input int sh);
    longint q;
    q = (sh == 0) ? v : ((v + (longint'(1) << (sh - 1))) >>> sh);
    if (q < 0) return 0;
    if (q > 255) return 255;
    return int'(q);
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    for (int r = 0; r < int'(PE_ROWS); r++) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      if (int'(out_pix[r]) != e) begin
        failures++;
        if (failures < 10) $display("FAIL got %0d exp %0d", out_pix[r], e);
      end
    end
  end

  initial begin
    for (int r = 0; r < int'(PE_ROWS); r++) in_sum[r] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 3) != 0);
      out_shift = 5'($urandom_range(0, 12));
      for (int r = 0; r < int'(PE_ROWS); r++) begin
        in_sum[r] = acc_t'($signed($urandom_range(0, 200000)) - 100000);
        if (in_valid) begin
          exp_q.push_back(model(longint'(in_sum[r]), int'(out_shift)));
          if (in_sum[r] < 0) n_neg++;
          if (model(longint'(in_sum[r]), int'(out_shift)) == 255) n_sat++;
        end
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
    checks++; if (exp_q.size() != 0) failures++;
    checks++; if (n_neg == 0 || n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
