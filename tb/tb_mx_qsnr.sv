// tb_mx_qsnr: quantization sums[0]-to-noise ratio of the hardware quantizer.
//
// Draws 10,000 vectors of 16 values from X ~ N(0, s^2) with s = |N(0,1)|
// (a Gaussian whose scale itself varies from vector to vector), quantizes
// each with mx_quantizer in MX9, MX6 and MX4, dequantizes the result and
// measures QSNR = -10 log10( sum ||Q(X)-X||^2 / sum ||X||^2 ).
// Checks:
//  * every vector meets the worst-case bound on the noise-to-sums[0] ratio
//      ||Q(X)-X||^2 / ||X||^2 <= (k1 + (2^(2b)-1) k2) / 2^(2b) * 2^(-2m),
//    b = 2^d2 - 1, i.e. QSNR >= 6.02 m + 10 log10(2^(2b) / (k1 + (2^(2b)-1) k2));
//  * the QSNR of MX9 exceeds that of the same block format without
//    microexponents (16-element blocks, 8-bit shared exponent, 7-bit
//    magnitudes, modelled here in software) by 3.6 dB +/- 1.5 dB;
//  * each mantissa bit is worth about 6 dB: QSNR(MX9) - QSNR(MX6) and
//    QSNR(MX6) - QSNR(MX4) lie within 2 dB of 6.02 dB per bit.
module tb_mx_qsnr;
  import mx_pkg::*;
  import mx_tb_pkg::*;
  localparam int M = MX_M, K1 = MX_K1, K2 = MX_K2, D2 = MX_D2, NS = K1 / K2;
  localparam int N_VEC = 10000;

  mx_fmt_e                 fmt;
  logic [K1-1:0][31:0]     x;
  logic [7:0]              shared_exp;
  logic [NS-1:0][D2-1:0]   sub_shift;
  logic [K1-1:0]           sign;
  logic [K1-1:0][M-1:0]    mag;
  logic [$clog2(K1+1)-1:0] n_sat;
  int checks = 0, failures = 0;
  // running sums of the experiment (kept at module level so that they live
  // across the delays of the stimulus loop)
  real sums[2];  // total signal power, noise of the block format without microexponents
  real xv[K1], sig, noise[3], q, bound[3], s, mx_db[3], bfp_db, beta4, vn;
  int  e_max, mb, qi;
  bit  sat;

  mx_quantizer dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967296.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  function automatic real db(real nse, real pwr);
    return -10.0 * $log10(nse / pwr);
  endfunction

  initial begin
    beta4 = 4.0 ** ((1 << D2) - 1);
    sums[0] = 0.0; sums[1] = 0.0;
    for (int f = 0; f < 3; f++) begin
      noise[f] = 0.0;
      mb = fmt_mant_bits(mx_fmt_e'(f));
      bound[f] = (real'(K1) + (beta4 - 1.0) * real'(K2)) / beta4 * pow2(-2 * mb);
    end
    for (int n = 0; n < N_VEC; n++) begin
      s = gauss();
      if (s < 0) s = -s;
      if (s < 1e-6) s = 1e-6;
      sig = 0.0;
      e_max = 0;
      for (int i = 0; i < K1; i++) begin
        x[i]  = f32_round(s * gauss());
        xv[i] = f32_to_real(x[i]);
        sig   = sig + xv[i] * xv[i];
        if (int'(x[i][30:23]) > e_max) e_max = int'(x[i][30:23]);
      end
      sums[0] = sums[0] + sig;
      // the same block format without microexponents, in software
      for (int i = 0; i < K1; i++) begin
        qi = ref_q_mag(x[i], e_max, 0, M, sat);
        q  = real'(qi) * pow2(e_max - 127 - (M - 1));
        q  = x[i][31] ? -q : q;
        sums[1] = sums[1] + (q - xv[i]) * (q - xv[i]);
      end
      for (int f = 0; f < 3; f++) begin
        fmt = mx_fmt_e'(f);
        #1;
        vn = 0.0;
        for (int i = 0; i < K1; i++) begin
          q = real'(mag[i]) * pow2(int'(shared_exp) - 127 - int'(sub_shift[i / K2]) - (M - 1));
          q = sign[i] ? -q : q;
          vn = vn + (q - xv[i]) * (q - xv[i]);
        end
        noise[f] = noise[f] + vn;
        checks++;
        if (vn > bound[f] * sig) begin
          failures++;
          if (failures < 10) $display("FAIL bound fmt %0d vector %0d: nsr %g > %g", f, n, vn / sig, bound[f]);
        end
      end
    end
    for (int f = 0; f < 3; f++) mx_db[f] = db(noise[f], sums[0]);
    bfp_db = db(sums[1], sums[0]);
    $display("QSNR dB: MX9 %0.2f  MX6 %0.2f  MX4 %0.2f  block FP without microexponents (m=7) %0.2f",
             mx_db[0], mx_db[1], mx_db[2], bfp_db);
    $display("lower bounds dB: MX9 %0.2f  MX6 %0.2f  MX4 %0.2f",
             db(bound[0], 1.0), db(bound[1], 1.0), db(bound[2], 1.0));
    checks += 3;
    if (mx_db[0] - bfp_db < 3.6 - 1.5 || mx_db[0] - bfp_db > 3.6 + 1.5) failures++;
    if ((mx_db[0] - mx_db[1]) / 3.0 < 6.02 - 2.0 || (mx_db[0] - mx_db[1]) / 3.0 > 6.02 + 2.0) failures++;
    if ((mx_db[1] - mx_db[2]) / 2.0 < 6.02 - 2.0 || (mx_db[1] - mx_db[2]) / 2.0 > 6.02 + 2.0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
