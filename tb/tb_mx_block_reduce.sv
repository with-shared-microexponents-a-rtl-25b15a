// tb_mx_block_reduce: random K1-element block pairs with random sub-block
// shifts; the expected block sum is built from integer products and
// floor-scaled sub-block sums.
module tb_mx_block_reduce;
  import mx_tb_pkg::*;
  localparam int M = 7, K1 = 16, K2 = 2, D2 = 1, NS = K1 / K2;
  localparam int BW = 2*M + (1 << D2) + $clog2(K1);
  logic [K1-1:0]         a_sign, b_sign;
  logic [K1-1:0][M-1:0]  a_mag, b_mag;
  logic [NS-1:0][D2-1:0] a_ss, b_ss;
  logic signed [BW-1:0]  sum;
  int checks = 0, failures = 0;

  mx_block_reduce #(.M(M), .K1(K1), .K2(K2), .D2(D2)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sb, e;
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < K1; i++) begin
        a_sign[i] = 1'($urandom); b_sign[i] = 1'($urandom);
        a_mag[i]  = M'($urandom); b_mag[i]  = M'($urandom);
        if (n < 2) begin a_mag[i] = '1; b_mag[i] = '1; a_sign[i] = n[0]; b_sign[i] = 0; end
      end
      for (int s = 0; s < NS; s++) begin a_ss[s] = D2'($urandom); b_ss[s] = D2'($urandom); end
      if (n < 2) begin a_ss = '0; b_ss = '0; end
      #1;
      e = 0;
      for (int s = 0; s < NS; s++) begin
        sb = 0;
        for (int i = s * K2; i < (s + 1) * K2; i++)
          sb += (a_sign[i] ^ b_sign[i] ? -1 : 1) * longint'(a_mag[i]) * longint'(b_mag[i]);
        e += floor_scale(sb, ((1 << D2) - 1) - int'(a_ss[s]) - int'(b_ss[s]));
      end
      checks++;
      if (longint'(sum) != e) begin
        failures++;
        if (failures < 10) $display("FAIL got %0d exp %0d", sum, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
