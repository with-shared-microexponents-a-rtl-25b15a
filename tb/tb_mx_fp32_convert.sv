// tb_mx_fp32_convert: random fixed-point sums and exponents, including
// ones that round up, underflow and overflow; expected FP32 comes from the
// double value sum * 2^(max_exp - 254 - LSB_OFS) rounded to nearest even.
module tb_mx_fp32_convert;
  import mx_tb_pkg::*;
  localparam int SW = 27, EXPW = 9, LSB_OFS = 18;
  logic signed [SW-1:0] sum;
  logic [EXPW-1:0]      max_exp;
  logic [31:0]          result;
  int checks = 0, failures = 0, n_round = 0, n_zero = 0, n_inf = 0;

  mx_fp32_convert #(.SW(SW), .EXPW(EXPW), .LSB_OFS(LSB_OFS)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] e;
    longint s;
    for (int n = 0; n < 6000; n++) begin
      s = longint'($signed(SW'($urandom))) >>> ($urandom % SW);
      if (n % 40 == 0) s = -(longint'(1) << (SW - 1));
      if (n % 40 == 1) s = (longint'(1) << 25) - 1;       // rounds up a binade
      sum     = SW'(s);
      max_exp = (n % 5 == 0) ? EXPW'($urandom) : EXPW'(230 + $urandom % 50);
      #1;
      e = f32_round(real'(s) * mx_tb_pkg::pow2((int'(max_exp) - 254 - LSB_OFS)));
      if (e[30:0] == 0 && s != 0) n_zero++;
      if (e[30:23] == 8'hFF) n_inf++;
      if (s > (1 << 24) || s < -(1 << 24)) n_round++;
      checks++;
      if (result != e) begin
        failures++;
        if (failures < 10) $display("FAIL s=%0d e=%0d got %h exp %h", s, max_exp, result, e);
      end
    end
    checks++;
    if (n_round == 0 || n_zero == 0 || n_inf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
