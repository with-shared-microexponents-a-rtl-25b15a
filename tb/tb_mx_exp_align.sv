// tb_mx_exp_align: block exponent sums, their maximum and the distances
// below it, for random and extreme shared exponents.
module tb_mx_exp_align;
  localparam int NB = 4, D1 = 8;
  logic [NB-1:0][D1-1:0] a_exp, b_exp;
  logic [D1:0]           max_exp;
  logic [NB-1:0][D1:0]   diff;
  int checks = 0, failures = 0;

  mx_exp_align #(.NB(NB), .D1(D1)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s[NB], mx;
    for (int n = 0; n < 3000; n++) begin
      mx = -1;
      for (int i = 0; i < NB; i++) begin
        a_exp[i] = (n < 4) ? D1'(n * 85) : D1'($urandom);
        b_exp[i] = (n < 4) ? D1'(255 - n * 85) : D1'($urandom);
        if (n >= 4 && n % 3 == 0) b_exp[i] = D1'(i * 60);
        s[i] = int'(a_exp[i]) + int'(b_exp[i]);
        if (s[i] > mx) mx = s[i];
      end
      #1;
      checks++;
      if (int'(max_exp) != mx) failures++;
      for (int i = 0; i < NB; i++) begin
        checks++;
        if (int'(diff[i]) != mx - s[i]) begin
          failures++;
          if (failures < 10) $display("FAIL blk %0d diff %0d exp %0d", i, diff[i], mx - s[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
