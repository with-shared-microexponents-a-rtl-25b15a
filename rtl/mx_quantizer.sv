// mx_quantizer: converts one block of K1 FP32 values into an MX block.
//
// How it works:
//  * The shared exponent E is the largest FP32 exponent field in the block,
//    so the element of largest magnitude sets the block scale.
//  * Each sub-block of K2 elements gets a shift ss = min(2^D2-1, E - e_sb),
//    where e_sb is the largest exponent inside the sub-block: a sub-block of
//    small values is scaled up by 2^ss and keeps ss more bits of precision.
//  * Each element is divided by 2^(E-127-ss), giving |x| < 2, and rounded to
//    an m-bit magnitude with one integer bit (m = 7, 4, 2 for MX9/6/4).
//    Rounding is to nearest with ties away from zero; a value that rounds up
//    to 2.0 is clamped to the largest magnitude and counted in n_sat.
//    The magnitude is output left-aligned in an M-bit field.
// The choice of E and ss follows the paper's definition of the format; the
// tie rule, the clamp, and reading subnormals as zero are this design's own.
// Exponent 255 (infinity, NaN) is not treated specially. The sign outputs
// are the FP32 sign bits passed straight through.
// Purely combinational.
module mx_quantizer
  import mx_pkg::*;
#(
  parameter int unsigned M  = MX_M,
  parameter int unsigned K1 = MX_K1,
  parameter int unsigned K2 = MX_K2,
  parameter int unsigned D1 = MX_D1,
  parameter int unsigned D2 = MX_D2,
  localparam int unsigned NS = K1 / K2
) (
  input  mx_fmt_e                 fmt,
  input  logic [K1-1:0][31:0]     x,
  output logic [D1-1:0]           shared_exp,
  output logic [NS-1:0][D2-1:0]   sub_shift,
  output logic [K1-1:0]           sign,
  output logic [K1-1:0][M-1:0]    mag,
  output logic [$clog2(K1+1)-1:0] n_sat
);
  localparam int unsigned SSMAX = (1 << D2) - 1;

  logic [K1-1:0][7:0] ex;
  logic [NS-1:0][7:0] sb_max;
  int unsigned        mbits, t;
  logic [23:0]        sig;
  logic [24:0]        q;

  always_comb begin
    mbits      = fmt_mant_bits(fmt);
    if (mbits > M) mbits = M;
    shared_exp = '0;
    for (int i = 0; i < int'(K1); i++) begin
      ex[i] = x[i][30:23];
      if (D1'(ex[i]) > shared_exp) shared_exp = D1'(ex[i]);
    end
    for (int s = 0; s < int'(NS); s++) begin
      sb_max[s] = '0;
      for (int j = 0; j < int'(K2); j++)
        if (ex[s*K2+j] > sb_max[s]) sb_max[s] = ex[s*K2+j];
      sub_shift[s] = (int'(shared_exp) - int'(sb_max[s]) >= int'(SSMAX))
                   ? D2'(SSMAX) : D2'(int'(shared_exp) - int'(sb_max[s]));
    end
    n_sat = '0;
    for (int i = 0; i < int'(K1); i++) begin
      sign[i] = x[i][31];
      sig     = {1'b1, x[i][22:0]};
      // right shift that brings 1.f * 2^(e-E+ss) to an m-bit integer
      t = 24 - mbits + int'(shared_exp) - int'(sub_shift[i/K2]) - int'(ex[i]);
      if (ex[i] == 8'd0 || t > 24) q = '0;
      else q = 25'(sig >> t) + 25'(sig[t-1]);
      if (q >= 25'(1 << mbits)) begin
        q     = 25'((1 << mbits) - 1);
        n_sat = n_sat + 1'b1;
      end
      mag[i] = M'(q[M-1:0] << (M - mbits));
    end
  end
endmodule
