// tb_mx_mul_tc: checks the signed element multiplier against integer
// arithmetic for all magnitude pairs of the default 7-bit mantissa and
// both sign combinations.
module tb_mx_mul_tc;
  localparam int M = 7;
  logic              a_sign, b_sign;
  logic [M-1:0]      a_mag, b_mag;
  logic signed [2*M:0] prod;
  int checks = 0, failures = 0;

  mx_mul_tc #(.M(M)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_v;
    for (int s = 0; s < 4; s++)
      for (int i = 0; i < (1 << M); i++)
        for (int j = 0; j < (1 << M); j++) begin
          a_sign = s[0]; b_sign = s[1]; a_mag = M'(i); b_mag = M'(j);
          #1;
          exp_v = i * j * ((s[0] ^ s[1]) ? -1 : 1);
          checks++;
          if (int'(prod) != exp_v) begin
            failures++;
            if (failures < 10) $display("FAIL %0d*%0d signs %0d: got %0d exp %0d", i, j, s, prod, exp_v);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
