// mx_tb_pkg: reference arithmetic for the MX dot-product testbenches.
//
// Everything here is computed with the simulator's double-precision reals
// and plain integers, written from the format definition rather than from
// the RTL: FP32 rounding works on the bits of a double, quantization divides
// by the block scale, and the pipeline's truncations are expressed with
// $floor. FP32 rules shared with the RTL: round to nearest even, results
// below 2^-126 become +0, results of 2^128 or more become infinity.
package mx_tb_pkg;

  // 2^p as a real, for any integer p.
  function automatic real pow2(int p);
    real r = 1.0;
    if (p >= 0) for (int i = 0; i < p; i++) r = r * 2.0;
    else        for (int i = 0; i < -p; i++) r = r / 2.0;
    return r;
  endfunction

  // Double -> FP32 bits.
  function automatic logic [31:0] f32_round(real v);
    logic [63:0] d;
    int          e;
    logic [24:0] mant;
    logic        half, rest;
    if (v == 0.0) return 32'h0;
    d    = $realtobits(v);
    e    = int'(d[62:52]) - 1023 + 127;
    mant = {2'b01, d[51:29]};
    half = d[28];
    rest = |d[27:0];
    if (half && (rest || mant[0])) mant = mant + 1;
    if (mant[24]) begin
      mant = mant >> 1;
      e    = e + 1;
    end
    if (e < 1)   return 32'h0;
    if (e > 254) return {d[63], 8'hFF, 23'h0};
    return {d[63], 8'(e), mant[22:0]};
  endfunction

  // FP32 bits -> double (normal numbers and zero; subnormals read as zero).
  function automatic real f32_to_real(logic [31:0] f);
    real m;
    if (f[30:23] == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    m = m * pow2((int'(f[30:23]) - 127));
    return f[31] ? -m : m;
  endfunction

  // A random normal FP32 value with exponent field in [emin, emax].
  function automatic logic [31:0] rand_f32(int emin, int emax);
    int e;
    e = emin + int'($urandom % (emax - emin + 1));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

  // Quantize one element given the block's shared exponent and its
  // sub-block shift; returns the m-bit magnitude (not left-aligned) and
  // sets sat when the rounded value had to be clamped.
  function automatic int ref_q_mag(logic [31:0] x, int shared_e, int ss, int m,
                                   output bit sat);
    real a, v;
    int  q;
    sat = 0;
    if (x[30:23] == 0) return 0;
    a = f32_to_real({1'b0, x[30:0]});
    v = a / pow2((shared_e - 127 - ss)) * pow2((m - 1));
    q = int'($floor(v + 0.5));
    if (q > (1 << m) - 1) begin
      q   = (1 << m) - 1;
      sat = 1;
    end
    return q;
  endfunction

  // floor(v * 2^p) for an integer v and any integer power p.
  function automatic longint floor_scale(longint v, int p);
    return longint'($floor(real'(v) * pow2(p)));
  endfunction

  // Reference for the whole dot product of MX vectors.
  //   exps[b], ss[s], sgn[i], mag[i] for each operand; M, K1, K2, D2, F as
  //   in the RTL. Returns the FP32 result and the number of non-zero blocks
  //   whose aligned value lies in [-1, 1) (all bits lost).
  function automatic logic [31:0] ref_dot(
      int R, int M, int K1, int K2, int D2, int F,
      int a_exp[], int a_ss[], bit a_sgn[], int a_mag[],
      int b_exp[], int b_ss[], bit b_sgn[], int b_mag[],
      output int n_flush);
    int     NB, FB, BW, LSB_OFS, maxe, be;
    longint sb, blk, al, total;
    real    v;
    NB      = R / K1;
    FB      = (1 << D2) - 1;
    BW      = 2 * M + (1 << D2) + $clog2(K1);
    LSB_OFS = 2 * (M - 1) + FB + (F - BW);
    maxe    = 0;
    for (int b = 0; b < NB; b++)
      if (a_exp[b] + b_exp[b] > maxe) maxe = a_exp[b] + b_exp[b];
    total   = 0;
    n_flush = 0;
    for (int b = 0; b < NB; b++) begin
      blk = 0;
      for (int s = b * K1 / K2; s < (b + 1) * K1 / K2; s++) begin
        sb = 0;
        for (int i = s * K2; i < (s + 1) * K2; i++)
          sb += (a_sgn[i] ^ b_sgn[i]) ? -longint'(a_mag[i] * b_mag[i])
                                      :  longint'(a_mag[i] * b_mag[i]);
        blk += floor_scale(sb, FB - (a_ss[s] + b_ss[s]));
      end
      be = a_exp[b] + b_exp[b];
      v  = real'(blk) * pow2((F - BW - (maxe - be)));
      al = longint'($floor(v));
      if (blk != 0 && v < 1.0 && v >= -1.0) n_flush++;
      total += al;
    end
    return f32_round(real'(total) * pow2((maxe - 254 - LSB_OFS)));
  endfunction

endpackage
