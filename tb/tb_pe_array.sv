// Testbench of pe_array: random 7-pixel input columns and 3-weight kernel columns; each of the
// 5 partial sums must equal sum_k in[r+k] * w[k], computed here independently.  Also the
// example of the paper's data-flow figure: output OA1 = A1*WA1 + A2*WA2 + A3*WA3.
module tb_pe_array;
  import sr_pkg::*;
  pix_t  in_pix [WIN_ROWS];
  wgt_t  w [K];
  psum_t psum [PE_ROWS];
  int checks = 0, failures = 0;

  pe_array dut (.in_pix, .w, .psum);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      for (int r = 0; r < int'(WIN_ROWS); r++)
        in_pix[r] = (n < 10) ? pix_t'(n == 0 ? 255 : r + 1) : pix_t'($urandom);
      for (int k = 0; k < int'(K); k++) w[k] = (n == 0) ? wgt_t'(-128) : wgt_t'($urandom);
      #1;
      for (int r = 0; r < int'(PE_ROWS); r++) begin
        int e;
        e = 0;
        for (int k = 0; k < int'(K); k++) e += int'(in_pix[r + k]) * int'(w[k]);
        checks++;
        if (int'(psum[r]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d r=%0d got %0d exp %0d", n, r, psum[r], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
