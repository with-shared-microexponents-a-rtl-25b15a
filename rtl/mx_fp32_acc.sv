// mx_fp32_acc: FP32 accumulator at the end of the MX dot-product pipeline.
//
// Each valid FP32 input is added to the accumulator register with an FP32
// adder (round to nearest even); when 'clear' accompanies the input, the
// register is loaded with the input instead, starting a new sum. The paper
// names this stage ("FP32 Accumulate") and says results accumulate serially
// in floating point; the adder's details are this design's choices:
// subnormal operands read as zero, subnormal results flush to +0, overflow
// and infinite operands give infinity, and NaN is never produced (an
// exponent of 255 is treated as infinity).
// Timing: acc and acc_valid update one clock after in_valid.
// Reset: synchronous, active low, clears acc to +0 and acc_valid.
module mx_fp32_acc (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        in_valid,
  input  logic [31:0] in,
  output logic [31:0] acc,
  output logic        acc_valid
);
  function automatic logic [31:0] fp32_add(logic [31:0] opa, logic [31:0] opb);
    logic [31:0] x, y;
    logic [7:0]  ex, ey;
    logic [23:0] sx, sy;
    logic [51:0] X, Y, S;
    logic [63:0] norm;
    logic        sticky_in, guard, sticky, rnd;
    logic [23:0] mant;
    logic [24:0] mant_r;
    int          d, lead, e;
    // subnormals read as zero
    if (opa[30:23] == 8'd0) opa = {opa[31], 31'd0};
    if (opb[30:23] == 8'd0) opb = {opb[31], 31'd0};
    if (opa[30:23] == 8'hFF) return {opa[31], 8'hFF, 23'd0};
    if (opb[30:23] == 8'hFF) return {opb[31], 8'hFF, 23'd0};
    if (opa[30:0] >= opb[30:0]) begin x = opa; y = opb; end
    else                    begin x = opb; y = opa; end
    if (y[30:0] == 31'd0) return (x[30:0] == 31'd0) ? {x[31] & y[31], 31'd0} : x;
    ex = x[30:23];
    ey = y[30:23];
    sx = {1'b1, x[22:0]};
    sy = {1'b1, y[22:0]};
    d  = int'(ex) - int'(ey);
    X  = {1'b0, sx, 27'd0};
    if (d > 50) begin
      Y = 52'd1;                       // whole operand becomes sticky
    end else begin
      Y         = {1'b0, sy, 27'd0} >> d;
      sticky_in = (d > 27) ? |(sy & ((24'd1 << (d - 27)) - 24'd1)) : 1'b0;
      Y[0]      = Y[0] | sticky_in;
    end
    S = (x[31] == y[31]) ? X + Y : X - Y;
    if (S == 52'd0) return 32'd0;
    lead = 0;
    for (int i = 0; i < 52; i++) if (S[i]) lead = i;
    e      = int'(ex) + lead - 50;
    norm   = {S, 12'd0} << (51 - lead);
    mant   = norm[63:40];
    guard  = norm[39];
    sticky = |norm[38:0];
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + 25'(rnd);
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e      = e + 1;
    end
    if (e < 1)   return 32'd0;
    if (e > 254) return {x[31], 8'hFF, 23'd0};
    return {x[31], 8'(e), mant_r[22:0]};
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      acc_valid <= 1'b0;
    end else begin
      acc_valid <= in_valid;
      if (in_valid) acc <= clear ? in : fp32_add(acc, in);
    end
  end
endmodule
