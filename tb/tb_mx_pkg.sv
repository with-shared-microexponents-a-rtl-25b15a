// tb_mx_pkg: checks the shared format constants and the mantissa width of
// each format code against the MX9/MX6/MX4 definitions (7, 4, 2 bits;
// k1 = 16, k2 = 2, d1 = 8, d2 = 1), and the average bits per element
// (m + 1) + d1/k1 + d2/k2 = 9, 6, 4.
module tb_mx_pkg;
  import mx_pkg::*;
  int checks = 0, failures = 0;

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    int bits_x16;
    #1;
    check(int'(fmt_mant_bits(FMT_MX9)), 7, "MX9 m");
    check(int'(fmt_mant_bits(FMT_MX6)), 4, "MX6 m");
    check(int'(fmt_mant_bits(FMT_MX4)), 2, "MX4 m");
    check(MX_K1, 16, "k1"); check(MX_K2, 2, "k2"); check(MX_D1, 8, "d1"); check(MX_D2, 1, "d2");
    check(MX_M, 7, "M");
    for (int f = 0; f < 3; f++) begin
      // 16 * ((m+1) + d1/k1 + d2/k2), kept integral
      bits_x16 = 16 * (int'(fmt_mant_bits(mx_fmt_e'(f))) + 1) + 16 * MX_D1 / MX_K1 + 16 * MX_D2 / MX_K2;
      check(bits_x16, 16 * ((f == 0) ? 9 : (f == 1) ? 6 : 4), "bits per element");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
