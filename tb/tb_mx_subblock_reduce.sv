// tb_mx_subblock_reduce: random signed products and every sub-block shift
// combination; the expected value is floor(sum * 2^(2^D2-1) / 2^(ss_a+ss_b)).
module tb_mx_subblock_reduce;
  import mx_tb_pkg::*;
  localparam int M = 7, K2 = 2, D2 = 1;
  localparam int PW = 2*M + 1, OW = 2*M + (1 << D2) + $clog2(K2);
  logic signed [K2-1:0][PW-1:0] prods;
  logic [D2-1:0] a_ss, b_ss;
  logic signed [OW-1:0] sum;
  int checks = 0, failures = 0;

  mx_subblock_reduce #(.M(M), .K2(K2), .D2(D2)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint raw, exp_v;
    int lim = (1 << (2*M)) - 1;
    for (int n = 0; n < 4000; n++) begin
      raw = 0;
      for (int i = 0; i < K2; i++) begin
        int p;
        p = int'($urandom % (2*lim + 1)) - lim;
        if (n < 8) p = (n[0] ? lim : -lim);       // extremes first
        prods[i] = PW'(p);
        raw += p;
      end
      a_ss = D2'($urandom); b_ss = D2'($urandom);
      #1;
      exp_v = floor_scale(raw, ((1 << D2) - 1) - (int'(a_ss) + int'(b_ss)));
      checks++;
      if (longint'(sum) != exp_v) begin
        failures++;
        if (failures < 10) $display("FAIL raw %0d ss %0d/%0d got %0d exp %0d", raw, a_ss, b_ss, sum, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
