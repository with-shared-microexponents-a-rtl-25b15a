// mx_exp_align: exponent side of the MX dot product.
//
// For each of the NB = r/k1 block pairs the two D1-bit shared exponents are
// added (D1+1 bits, still carrying twice the FP32 bias). A vector max gives
// the largest block exponent, and a subtract gives every block's distance
// below it; that distance is the right shift that aligns the block sum to
// the largest one. These are the "Add", "Vector Max" and "Subtract" boxes
// of the paper's exponent column, with the widths printed there.
// Purely combinational.
module mx_exp_align #(
  parameter int unsigned NB = mx_pkg::MX_R / mx_pkg::MX_K1,
  parameter int unsigned D1 = mx_pkg::MX_D1
) (
  input  logic [NB-1:0][D1-1:0] a_exp,
  input  logic [NB-1:0][D1-1:0] b_exp,
  output logic [D1:0]           max_exp,
  output logic [NB-1:0][D1:0]   diff
);
  logic [NB-1:0][D1:0] blk_exp;

  always_comb begin
    max_exp = '0;
    for (int i = 0; i < int'(NB); i++) begin
      blk_exp[i] = {1'b0, a_exp[i]} + {1'b0, b_exp[i]};
      if (blk_exp[i] > max_exp) max_exp = blk_exp[i];
    end
    for (int i = 0; i < int'(NB); i++) diff[i] = max_exp - blk_exp[i];
  end
endmodule
