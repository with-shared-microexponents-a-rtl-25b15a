// tb_mx_fp32_acc: streams of random FP32 values (with gaps and clears)
// into the accumulator; each result is compared with the double sum of the
// previous accumulator and the input, rounded to FP32. Also checks the
// one-clock latency of acc_valid.
module tb_mx_fp32_acc;
  import mx_tb_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic [31:0] in = '0, acc;
  logic acc_valid;
  int checks = 0, failures = 0, cycles = 0;

  mx_fp32_acc dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] model = '0, prev;
    bit          was_valid;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 5000; n++) begin
      in_valid <= ($urandom % 4 != 0);
      clear    <= (n == 0) || ($urandom % 16 == 0);
      case ($urandom % 4)
        0: in <= rand_f32(120, 134);
        1: in <= rand_f32(1, 254);
        2: in <= {~model[31], model[30:23], 23'($urandom)};    // cancellation
        default: in <= rand_f32(100, 160);
      endcase
      @(posedge clk);
      #1;
      was_valid = in_valid;
      prev = model;
      if (in_valid) model = clear ? in : f32_round(f32_to_real(prev) + f32_to_real(in));
      if (model[30:23] == 8'hFF) model = 32'h0;          // keep the stream finite
      checks++;
      if (acc_valid != was_valid) failures++;
      if (in_valid) begin
        checks++;
        if (acc != (clear ? in : f32_round(f32_to_real(prev) + f32_to_real(in)))) begin
          failures++;
          if (failures < 10) $display("FAIL prev %h + %h: got %h", prev, in, acc);
        end
      end
      if (model == 32'h0 && in_valid) begin
        clear <= 1; in_valid <= 1; in <= rand_f32(120, 134);
        @(posedge clk); #1; model = in;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
