// mx_fp32_convert: converts the fixed-point dot product into FP32.
//
// Input is the signed SW-bit sum of the aligned blocks and the largest block
// exponent max_exp (the sum of two FP32-biased shared exponents). The value
// represented is
//   sum * 2^(max_exp - 2*127 - LSB_OFS)
// where LSB_OFS is the number of fraction bits the pipeline carries below
// the integer product (set by the instantiating pipeline). The magnitude is
// normalised with a leading-one search, rounded to 24 significant bits with
// round-to-nearest-even, and packed. Results below the smallest normal FP32
// number are flushed to +0 and results above the largest finite one become
// infinity. The rounding and range rules are this design's choices; the
// paper only names the "FP32 Convert" stage. Purely combinational.
module mx_fp32_convert #(
  parameter int unsigned SW      = 27,
  parameter int unsigned EXPW    = mx_pkg::MX_D1 + 1,
  parameter int unsigned LSB_OFS = 18
) (
  input  logic signed [SW-1:0]   sum,
  input  logic        [EXPW-1:0] max_exp,
  output logic        [31:0]     result
);
  logic              neg;
  logic [SW-1:0]     mag;
  logic [63:0]       ext, norm;
  int                lead, e;
  logic [23:0]       mant;
  logic              guard, sticky, rnd;
  logic [24:0]       mant_r;

  always_comb begin
    neg  = sum[SW-1];
    mag  = neg ? SW'(-sum) : SW'(sum);
    lead = -1;
    for (int i = 0; i < int'(SW); i++) if (mag[i]) lead = i;
    ext  = 64'(mag) << (64 - SW);
    norm = (lead >= 0) ? ext << (SW - 1 - lead) : '0;
    mant   = norm[63:40];
    guard  = norm[39];
    sticky = |norm[38:0];
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + 25'(rnd);
    e      = int'(max_exp) - 127 + lead - int'(LSB_OFS);
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e      = e + 1;
    end
    if (lead < 0 || e < 1) result = 32'h0000_0000;
    else if (e > 254)      result = {neg, 8'hFF, 23'h0};
    else                   result = {neg, 8'(e), mant_r[22:0]};
  end

  initial begin
    assert (SW <= 64) else $error("mx_fp32_convert: SW must not exceed 64");
  end
endmodule
