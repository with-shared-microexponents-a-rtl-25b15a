// tb_mx_dot_product: random MX vector pairs streamed one per clock (with
// gaps) into the default 64-element pipeline. Each FP32 result is compared
// with the reference dot product and must appear exactly two clocks after
// its operands.
module tb_mx_dot_product;
  import mx_tb_pkg::*;
  localparam int M = 7, K1 = 16, K2 = 2, D1 = 8, D2 = 1, R = 64, F = 25;
  localparam int NB = R / K1, NS = R / K2;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [NB-1:0][D1-1:0] a_exp, b_exp;
  logic [NS-1:0][D2-1:0] a_ss, b_ss;
  logic [R-1:0]          a_sign, b_sign;
  logic [R-1:0][M-1:0]   a_mag, b_mag;
  logic                  out_valid;
  logic [31:0]           result;
  logic [$clog2(NB+1)-1:0] flush_blocks;
  int checks = 0, failures = 0, cycles = 0, n_flush_seen = 0;

  mx_dot_product dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 10000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results, indexed by the cycle they must appear in
  logic [31:0] exp_q[int];
  int          expf_q[int];

  initial begin
    int ae[], as[], am[], be[], bs[], bm[], nf;
    bit asg[], bsg[];
    ae = new[NB]; be = new[NB]; as = new[NS]; bs = new[NS];
    am = new[R]; bm = new[R]; asg = new[R]; bsg = new[R];
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 3000; n++) begin
      @(posedge clk);
      in_valid <= ($urandom % 5 != 0);
      for (int b = 0; b < NB; b++) begin
        ae[b] = 100 + $urandom % 40; be[b] = 100 + $urandom % 40;
        if (n % 9 == 0) ae[b] = $urandom % 256;
        a_exp[b] <= D1'(ae[b]); b_exp[b] <= D1'(be[b]);
      end
      for (int s = 0; s < NS; s++) begin
        as[s] = $urandom % 2; bs[s] = $urandom % 2;
        a_ss[s] <= D2'(as[s]); b_ss[s] <= D2'(bs[s]);
      end
      for (int i = 0; i < R; i++) begin
        am[i] = $urandom % 128; bm[i] = $urandom % 128;
        asg[i] = 1'($urandom); bsg[i] = 1'($urandom);
        a_mag[i] <= M'(am[i]); b_mag[i] <= M'(bm[i]);
        a_sign[i] <= asg[i]; b_sign[i] <= bsg[i];
      end
      #1;
      if (in_valid) begin
        exp_q[cycles + 2]  = ref_dot(R, M, K1, K2, D2, F, ae, as, asg, am, be, bs, bsg, bm, nf);
        expf_q[cycles + 2] = nf;
      end
    end
    repeat (4) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n_flush_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #2;
    if (rst_n) begin
      checks++;
      if (out_valid != exp_q.exists(cycles)) begin
        failures++;
        if (failures < 10) $display("FAIL valid timing at cycle %0d", cycles);
      end
      if (out_valid && exp_q.exists(cycles)) begin
        checks++;
        if (result != exp_q[cycles] || int'(flush_blocks) != expf_q[cycles]) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d got %h/%0d exp %h/%0d", cycles, result, flush_blocks, exp_q[cycles], expf_q[cycles]);
        end
        n_flush_seen += int'(flush_blocks);
      end
      exp_q.delete(cycles);
    end
  end
endmodule
