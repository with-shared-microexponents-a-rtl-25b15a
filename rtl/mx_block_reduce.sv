// mx_block_reduce: reduces the Hadamard product of one K1-element MX block
// pair to a single fixed-point value.
//
// K1 mx_mul_tc multipliers feed K1/K2 mx_subblock_reduce units (each sums
// K2 products and applies the combined sub-block shift), and a vector sum
// adds the K1/K2 shifted sub-block sums. Output width, as printed in the
// paper's pipeline figure: 2M + 2^D2 + log2(K1), with 2^D2-1 fraction bits
// below the product LSB. The shared block exponents are handled elsewhere
// (mx_exp_align). Purely combinational.
module mx_block_reduce #(
  parameter int unsigned M  = mx_pkg::MX_M,
  parameter int unsigned K1 = mx_pkg::MX_K1,
  parameter int unsigned K2 = mx_pkg::MX_K2,
  parameter int unsigned D2 = mx_pkg::MX_D2,
  localparam int unsigned NS = K1 / K2,
  localparam int unsigned PW = 2*M + 1,
  localparam int unsigned SBW = 2*M + (1 << D2) + $clog2(K2),
  localparam int unsigned BW  = 2*M + (1 << D2) + $clog2(K1)
) (
  input  logic [K1-1:0]         a_sign,
  input  logic [K1-1:0][M-1:0]  a_mag,
  input  logic [NS-1:0][D2-1:0] a_ss,
  input  logic [K1-1:0]         b_sign,
  input  logic [K1-1:0][M-1:0]  b_mag,
  input  logic [NS-1:0][D2-1:0] b_ss,
  output logic signed [BW-1:0]  sum
);
  logic [K1-1:0][PW-1:0]  prods;
  logic [NS-1:0][SBW-1:0] sb_sums;

  for (genvar i = 0; i < int'(K1); i++) begin : g_mul
    mx_mul_tc #(.M(M)) u_mul (
      .a_sign(a_sign[i]), .a_mag(a_mag[i]),
      .b_sign(b_sign[i]), .b_mag(b_mag[i]),
      .prod  (prods[i])
    );
  end

  for (genvar s = 0; s < int'(NS); s++) begin : g_sub
    mx_subblock_reduce #(.M(M), .K2(K2), .D2(D2)) u_sub (
      .prods(prods[s*K2 +: K2]),
      .a_ss (a_ss[s]),
      .b_ss (b_ss[s]),
      .sum  (sb_sums[s])
    );
  end

  always_comb begin
    sum = '0;
    for (int s = 0; s < int'(NS); s++) sum += BW'($signed(sb_sums[s]));
  end
endmodule
