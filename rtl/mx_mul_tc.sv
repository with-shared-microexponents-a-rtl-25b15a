// mx_mul_tc: one element-pair multiplier of the MX dot product.
//
// Multiplies two M-bit sign-magnitude mantissas, XORs their signs and
// converts the 2M-bit product into a (2M+1)-bit two's-complement value.
// This is the "Multipliers / XOR / TC Convert" column at the top of the
// paper's dot-product pipeline; the widths are the ones printed there.
// Purely combinational. A zero magnitude gives 0 whatever the sign.
module mx_mul_tc #(
  parameter int unsigned M = mx_pkg::MX_M
) (
  input  logic                a_sign,
  input  logic [M-1:0]        a_mag,
  input  logic                b_sign,
  input  logic [M-1:0]        b_mag,
  output logic signed [2*M:0] prod
);
  logic [2*M-1:0] mag_prod;
  logic           neg;

  always_comb begin
    mag_prod = a_mag * b_mag;
    neg      = a_sign ^ b_sign;
    prod     = neg ? -$signed({1'b0, mag_prod}) : $signed({1'b0, mag_prod});
  end
endmodule
