// mx_subblock_reduce: sum of one K2-element sub-block, scaled by the
// shared microexponents of both operands.
//
// The K2 signed products of a sub-block are added, the two operands'
// D2-bit sub-block shifts are added (D2+1 bits), and the sum is
// arithmetically right-shifted by that amount. Following the widths the
// paper prints for this stage, the result keeps 2^D2-1 fraction bits:
//   out = floor(sum * 2^(2^D2-1) / 2^(ss_a+ss_b))
// i.e. width 2M+1+log2(K2) integer bits plus 2^D2-1 fraction bits
// = 2M + 2^D2 + log2(K2). With d2 = 1 a combined shift of 2 loses one LSB;
// that truncation (towards minus infinity) is this design's reading of the
// printed width. Purely combinational.
module mx_subblock_reduce #(
  parameter int unsigned M  = mx_pkg::MX_M,
  parameter int unsigned K2 = mx_pkg::MX_K2,
  parameter int unsigned D2 = mx_pkg::MX_D2,
  localparam int unsigned PW = 2*M + 1,               // product width
  localparam int unsigned FB = (1 << D2) - 1,         // fraction bits kept
  localparam int unsigned SW = PW + $clog2(K2),       // raw sum width
  localparam int unsigned OW = SW + FB                // 2M + 2^D2 + log2 K2
) (
  input  logic signed [K2-1:0][PW-1:0] prods,
  input  logic        [D2-1:0]         a_ss,
  input  logic        [D2-1:0]         b_ss,
  output logic signed [OW-1:0]         sum
);
  logic signed [SW-1:0] raw;
  logic        [D2:0]   shamt;
  logic signed [OW-1:0] widened;

  always_comb begin
    raw = '0;
    for (int i = 0; i < int'(K2); i++) raw += SW'($signed(prods[i]));
    shamt   = {1'b0, a_ss} + {1'b0, b_ss};
    widened = {raw, {FB{1'b0}}};
    sum     = widened >>> shamt;
  end
endmodule
