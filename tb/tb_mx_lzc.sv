// tb_mx_lzc: redundant-sign-bit count of random and edge-case values,
// compared with W-1 minus the number of bits the value needs.
module tb_mx_lzc;
  localparam int W = 20, CW = $clog2(W);
  logic [W-1:0]  value;
  logic [CW-1:0] count;
  int checks = 0, failures = 0;

  mx_lzc #(.W(W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int need_bits(longint v);   // magnitude bits, no sign
    int n = 0;
    longint t = (v < 0) ? -v - 1 : v;
    while (t > 0) begin n++; t = t >> 1; end
    return n;
  endfunction

  initial begin
    longint v;
    for (int n = 0; n < 3000; n++) begin
      if (n < 2 * W) v = (n % 2 == 0) ? (longint'(1) << (n / 2)) - 1 : -(longint'(1) << (n / 2));
      else v = longint'($signed(W'($urandom))) >>> ($urandom % W);
      if (v >= (longint'(1) << (W - 1)) || v < -(longint'(1) << (W - 1))) v = 0;
      value = W'(v);
      #1;
      checks++;
      if (int'(count) != W - 1 - need_bits(v)) begin
        failures++;
        if (failures < 10) $display("FAIL v=%0d got %0d exp %0d", v, count, W - 1 - need_bits(v));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
