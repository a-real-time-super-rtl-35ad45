// Testbench of pe_block: reproduces the convolution example of the paper (7 x 5 input A..E,
// 3 x 3 weights WA..WC, 5 x 3 outputs OA..OC).  In clock cycle n the window holds input
// columns n, n+1, n+2 and the sum of the three arrays' partial sums must be output column n,
// so the whole example takes three cycles.  Then random windows and weights, one per cycle.
module tb_pe_block;
  import sr_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  pix_t  win  [K][WIN_ROWS];
  wgt_t  w    [K][K];
  psum_t psum [K][PE_ROWS];
  int checks = 0, failures = 0;
  int img [5][WIN_ROWS];   // [column A..E][row]

  pe_block dut (.win, .w, .psum);

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_col(input int first_col, input int cyc);
    for (int r = 0; r < int'(PE_ROWS); r++) begin
      int got, e;
      got = 0; e = 0;
      for (int k = 0; k < int'(K); k++) begin
        got += int'(psum[k][r]);
        for (int d = 0; d < int'(K); d++) e += int'(win[k][r + d]) * int'(w[k][d]);
      end
      checks++;
      if (got != e) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d row %0d got %0d exp %0d", cyc, r, got, e);
      end
    end
  endtask

  initial begin
    int cycles;
    for (int c = 0; c < 5; c++) for (int r = 0; r < int'(WIN_ROWS); r++) img[c][r] = $urandom_range(0, 255);
    for (int k = 0; k < int'(K); k++) for (int d = 0; d < int'(K); d++) w[k][d] = wgt_t'($urandom);
    // paper example: output columns OA, OB, OC in three consecutive cycles
    cycles = 0;
    for (int n = 0; n < 3; n++) begin
      @(negedge clk);
      for (int k = 0; k < int'(K); k++) for (int r = 0; r < int'(WIN_ROWS); r++)
        win[k][r] = pix_t'(img[n + k][r]);
      @(posedge clk); cycles++;
      check_col(n, n);
    end
    checks++;
    if (cycles != 3) failures++;
    // random
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      for (int k = 0; k < int'(K); k++) begin
        for (int r = 0; r < int'(WIN_ROWS); r++) win[k][r] = pix_t'($urandom);
        for (int d = 0; d < int'(K); d++) w[k][d] = wgt_t'($urandom);
      end
      @(posedge clk);
      check_col(0, n);
      // array k must use only window column k
      for (int k = 0; k < int'(K); k++) begin
        int e;
        e = 0;
        for (int d = 0; d < int'(K); d++) e += int'(win[k][d]) * int'(w[k][d]);
        checks++;
        if (int'(psum[k][0]) != e) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
