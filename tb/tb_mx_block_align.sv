// tb_mx_block_align: random block sums and exponent distances; expects
// floor(sum * 2^(F-W-diff)) and 'flushed' when a non-zero sum lands in
// [-1, 1).
module tb_mx_block_align;
  localparam int W = 20, F = 25, D1 = 8;
  logic signed [W-1:0] sum;
  logic [D1:0]         diff;
  logic signed [F-1:0] aligned;
  logic                flushed;
  int checks = 0, failures = 0, n_flush = 0;

  mx_block_align #(.W(W), .F(F), .D1(D1)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real    v;
    longint s, e;
    bit     fl;
    for (int n = 0; n < 5000; n++) begin
      s = longint'($signed(W'($urandom))) >>> ($urandom % W);
      if (n % 50 == 0) s = -(longint'(1) << ($urandom % (W - 1)));
      sum  = W'(s);
      diff = (n % 4 == 0) ? (D1+1)'($urandom % 512) : (D1+1)'($urandom % 32);
      #1;
      v  = real'(s) * mx_tb_pkg::pow2((F - W - int'(diff)));
      e  = longint'($floor(v));
      fl = (s != 0) && v < 1.0 && v >= -1.0;
      n_flush += fl;
      checks += 2;
      if (longint'(aligned) != e || flushed != fl) begin
        failures++;
        if (failures < 10) $display("FAIL s=%0d diff=%0d got %0d/%0b exp %0d/%0b", s, diff, aligned, flushed, e, fl);
      end
    end
    checks++;
    if (n_flush == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
