// crew_pkg_tb: self-checking test of the shared package's helper functions.
//
// idx_bits() must map the 3-bit size code c to c + 1 index bits, and
// size_code_for(n) must give the smallest code whose index width can address
// n unique weights, for every n from 1 to 256. The expected values are worked
// out here with a separate loop over widths.
module crew_pkg_tb;
  import crew_pkg::*;
  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 8; c++) begin
      checks++;
      if (idx_bits(size_code_t'(c)) != c + 1) begin
        failures++;
        $display("idx_bits(%0d) = %0d", c, idx_bits(size_code_t'(c)));
      end
    end
    for (int n = 1; n <= UW_MAX; n++) begin
      automatic int w = 1;
      // smallest width w >= 1 with 2**w >= n
      while (2 ** w < n) w++;
      checks++;
      if (size_code_for(n) != size_code_t'(w - 1)) begin
        failures++;
        $display("size_code_for(%0d) = %0d, expected %0d", n, size_code_for(n), w - 1);
      end
      // the chosen width really addresses n weights
      checks++;
      if ((1 << idx_bits(size_code_for(n))) < n) failures++;
    end
    checks++;
    if (PP_W != 2 * Q_W || IDX_W != 8 || SIZE_W != 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
