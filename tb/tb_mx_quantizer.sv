// tb_mx_quantizer: random FP32 blocks in all three formats. Expected shared
// exponent, sub-block shifts, signs and magnitudes are computed from the
// format definition with real arithmetic; the test also makes sure that
// non-zero sub-block shifts and clamped elements both occur.
module tb_mx_quantizer;
  import mx_pkg::*;
  import mx_tb_pkg::*;
  localparam int M = 7, K1 = 16, K2 = 2, D1 = 8, D2 = 1, NS = K1 / K2;
  mx_fmt_e                 fmt;
  logic [K1-1:0][31:0]     x;
  logic [D1-1:0]           shared_exp;
  logic [NS-1:0][D2-1:0]   sub_shift;
  logic [K1-1:0]           sign;
  logic [K1-1:0][M-1:0]    mag;
  logic [$clog2(K1+1)-1:0] n_sat;
  int checks = 0, failures = 0, n_ss = 0, n_clamp = 0;

  mx_quantizer #(.M(M), .K1(K1), .K2(K2), .D1(D1), .D2(D2)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int E, ess[NS], m, q, nsat;
    bit sat;
    for (int n = 0; n < 3000; n++) begin
      fmt = mx_fmt_e'(n % 3);
      m   = (n % 3 == 0) ? 7 : (n % 3 == 1) ? 4 : 2;
      for (int i = 0; i < K1; i++) begin
        x[i] = rand_f32(124, 130);
        if (n % 7 == 0) x[i] = rand_f32(1, 254);
        if ($urandom % 10 == 0) x[i] = {1'($urandom), 31'd0};
        if (n % 11 == 0) x[i] = {1'($urandom), 8'd127, 23'h7FFFFF};  // rounds to 2.0
      end
      #1;
      E = 0;
      for (int i = 0; i < K1; i++) if (int'(x[i][30:23]) > E) E = int'(x[i][30:23]);
      checks++;
      if (int'(shared_exp) != E) failures++;
      nsat = 0;
      for (int s = 0; s < NS; s++) begin
        int se;
        se = 0;
        for (int j = 0; j < K2; j++) if (int'(x[s*K2+j][30:23]) > se) se = int'(x[s*K2+j][30:23]);
        ess[s] = (E - se > (1 << D2) - 1) ? (1 << D2) - 1 : E - se;
        n_ss += (ess[s] != 0);
        checks++;
        if (int'(sub_shift[s]) != ess[s]) failures++;
      end
      for (int i = 0; i < K1; i++) begin
        q = ref_q_mag(x[i], E, ess[i / K2], m, sat);
        nsat += sat;
        checks += 2;
        if (int'(mag[i]) != (q << (M - m))) begin
          failures++;
          if (failures < 10) $display("FAIL fmt %0d x=%h E=%0d ss=%0d got %0d exp %0d", m, x[i], E, ess[i/K2], mag[i], q << (M - m));
        end
        if (sign[i] != x[i][31]) failures++;
      end
      n_clamp += nsat;
      checks++;
      if (int'(n_sat) != nsat) failures++;
    end
    checks++;
    if (n_ss == 0 || n_clamp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
