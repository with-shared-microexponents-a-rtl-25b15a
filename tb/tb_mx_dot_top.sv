// tb_mx_dot_top: end-to-end test of the MX dot-product engine at its
// default size (R = 64, MX9/MX6/MX4 selectable per operation).
//
// Random FP32 vector pairs are streamed in, with idle cycles, random format
// changes and random accumulator clears. For every operation the test
// quantizes both vectors itself (shared exponent, sub-block shifts, rounded
// magnitudes), computes the reference dot product, and keeps an FP32 model
// of the accumulator. It checks dot two clocks and acc three clocks after
// the operation, and the clamp and flush counts. It also counts how often
// each mechanism happened (format switches, non-zero microexponent shifts,
// clamped elements, flushed blocks, clears, back-to-back operations) and
// fails if any never did.
module tb_mx_dot_top;
  import mx_pkg::*;
  import mx_tb_pkg::*;
  localparam int M = MX_M, K1 = MX_K1, K2 = MX_K2, R = MX_R, F = MX_F, D2 = MX_D2;
  localparam int NB = R / K1, NS = R / K2;
  localparam int N_OPS = 1500;

  logic clk = 0, rst_n = 0, in_valid = 0, acc_clear = 0;
  mx_fmt_e fmt = FMT_MX9;
  logic [R-1:0][31:0] a, b;
  logic dot_valid, acc_valid;
  logic [31:0] dot, acc;
  logic [$clog2(2*R+1)-1:0] sat_count;
  logic [$clog2(NB+1)-1:0]  flush_blocks;
  int checks = 0, failures = 0, cycles = 0;
  int ev_switch = 0, ev_ss = 0, ev_sat = 0, ev_flush = 0, ev_clear = 0, ev_b2b = 0;
  int ev_fmt[3] = '{0, 0, 0};

  mx_dot_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] exp_dot[int], exp_acc[int];
  int          exp_sat[int], exp_flush[int];

  // Quantize one FP32 vector with the reference rules.
  task automatic ref_quant(input logic [R-1:0][31:0] v, input int m,
                           output int e[], output int ss[], output bit sg[],
                           output int mg[], output int nsat);
    bit sat;
    e = new[NB]; ss = new[NS]; sg = new[R]; mg = new[R];
    nsat = 0;
    for (int bk = 0; bk < NB; bk++) begin
      e[bk] = 0;
      for (int i = bk * K1; i < (bk + 1) * K1; i++)
        if (int'(v[i][30:23]) > e[bk]) e[bk] = int'(v[i][30:23]);
    end
    for (int s = 0; s < NS; s++) begin
      int se;
      se = 0;
      for (int i = s * K2; i < (s + 1) * K2; i++) if (int'(v[i][30:23]) > se) se = int'(v[i][30:23]);
      ss[s] = e[s * K2 / K1] - se;
      if (ss[s] > (1 << D2) - 1) ss[s] = (1 << D2) - 1;
    end
    for (int i = 0; i < R; i++) begin
      sg[i] = v[i][31];
      mg[i] = ref_q_mag(v[i], e[i / K1], ss[i / K2], m, sat) << (M - m);
      nsat += sat;
    end
  endtask

  initial begin
    int ae[], as[], am[], be[], bs[], bm[], nf, na, nb2, m, c;
    bit asg[], bsg[], prev_valid = 0;
    logic [31:0] d, acc_model = '0;
    mx_fmt_e prev_fmt = FMT_MX9;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < N_OPS; n++) begin
      @(posedge clk);
      in_valid  <= ($urandom % 6 != 0);
      acc_clear <= (n == 0) || ($urandom % 8 == 0);
      fmt       <= mx_fmt_e'((n / 7 + $urandom % 2) % 3);
      for (int i = 0; i < R; i++) begin
        a[i] <= rand_f32(120, 127 + (i % 5));
        b[i] <= rand_f32(118, 130);
        if ((n + i) % 37 == 0) a[i] <= {1'($urandom), 8'd127, 23'h7FFFFF};   // clamps
        if (n % 13 == 0 && i / K1 == 1) b[i] <= rand_f32(90, 96);             // tiny block
        if ($urandom % 20 == 0) b[i] <= 32'h0;
      end
      #1;
      c = cycles;
      if (in_valid) begin
        m = fmt_mant_bits(fmt);
        ref_quant(a, m, ae, as, asg, am, na);
        ref_quant(b, m, be, bs, bsg, bm, nb2);
        d = ref_dot(R, M, K1, K2, D2, F, ae, as, asg, am, be, bs, bsg, bm, nf);
        acc_model = acc_clear ? d : f32_round(f32_to_real(acc_model) + f32_to_real(d));
        if (acc_model[30:23] == 8'hFF) acc_model = {acc_model[31], 8'hFF, 23'h0};
        exp_dot[c + 2] = d;  exp_sat[c + 2] = na + nb2;  exp_flush[c + 2] = nf;
        exp_acc[c + 3] = acc_model;
        ev_fmt[int'(fmt)]++;
        if (fmt != prev_fmt) ev_switch++;
        prev_fmt = fmt;
        for (int s = 0; s < NS; s++) ev_ss += (as[s] != 0) + (bs[s] != 0);
        ev_sat   += (na + nb2 > 0);
        ev_flush += (nf > 0);
        ev_clear += acc_clear;
        ev_b2b   += prev_valid;
      end
      prev_valid = in_valid;
    end
    @(posedge clk) in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_dot.size() != 0 || exp_acc.size() != 0) failures++;
    $display("events: switch=%0d mx9=%0d mx6=%0d mx4=%0d ss=%0d sat=%0d flush=%0d clear=%0d b2b=%0d",
             ev_switch, ev_fmt[0], ev_fmt[1], ev_fmt[2], ev_ss, ev_sat, ev_flush, ev_clear, ev_b2b);
    checks++;
    if (ev_switch == 0 || ev_fmt[0] == 0 || ev_fmt[1] == 0 || ev_fmt[2] == 0 || ev_ss == 0 ||
        ev_sat == 0 || ev_flush == 0 || ev_clear == 0 || ev_b2b == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #2;
    if (rst_n) begin
      checks += 2;
      if (dot_valid != exp_dot.exists(cycles)) failures++;
      if (acc_valid != exp_acc.exists(cycles)) failures++;
      if (dot_valid && exp_dot.exists(cycles)) begin
        checks++;
        if (dot != exp_dot[cycles] || int'(sat_count) != exp_sat[cycles] ||
            int'(flush_blocks) != exp_flush[cycles]) begin
          failures++;
          if (failures < 10) $display("FAIL dot cycle %0d got %h/%0d/%0d exp %h/%0d/%0d", cycles,
                                      dot, sat_count, flush_blocks, exp_dot[cycles], exp_sat[cycles], exp_flush[cycles]);
        end
      end
      if (acc_valid && exp_acc.exists(cycles)) begin
        checks++;
        if (acc != exp_acc[cycles]) begin
          failures++;
          if (failures < 10) $display("FAIL acc cycle %0d got %h exp %h", cycles, acc, exp_acc[cycles]);
        end
      end
      exp_dot.delete(cycles);
      exp_acc.delete(cycles);
    end
  end
endmodule
