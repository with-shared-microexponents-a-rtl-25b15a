// mx_dot_product: the MX dot-product pipeline for two R-element MX vectors.
//
// Data path (one block pair = K1 elements, NB = R/K1 block pairs):
//  1. mx_block_reduce per block pair: K1 products, sub-block sums shifted
//     by the combined microexponents, and a block sum of
//     BW = 2M + 2^D2 + log2(K1) bits.
//  2. mx_exp_align: block exponent = sum of the two shared exponents,
//     maximum over the blocks, and each block's distance below it.
//  3. mx_block_align per block: leading-zero normalisation and right shift
//     into an F-bit frame aligned to the largest block.
//  4. A fixed-point vector sum of F + log2(NB) bits.
//  5. mx_fp32_convert to FP32.
// The stage list and the widths follow the paper's pipeline figure.
// As in the paper's area study, only the inputs and the output are
// registered: a dot product presented with in_valid appears on result with
// out_valid two clocks later, and one can be started every clock.
// 'flush_blocks' counts, per result, the non-zero blocks that fell entirely
// below the F-bit frame. Reset (synchronous, active low) clears the valid
// flags; the data registers are loaded only with valid inputs.
module mx_dot_product
  import mx_pkg::*;
#(
  parameter int unsigned M  = MX_M,
  parameter int unsigned K1 = MX_K1,
  parameter int unsigned K2 = MX_K2,
  parameter int unsigned D1 = MX_D1,
  parameter int unsigned D2 = MX_D2,
  parameter int unsigned R  = MX_R,
  parameter int unsigned F  = MX_F,
  localparam int unsigned NB = R / K1,
  localparam int unsigned NS = R / K2,
  localparam int unsigned BW = 2*M + (1 << D2) + $clog2(K1),
  localparam int unsigned SW = F + $clog2(NB),
  localparam int unsigned LSB_OFS = 2*(M-1) + ((1 << D2) - 1) + (F - BW)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [NB-1:0][D1-1:0]     a_exp,
  input  logic [NS-1:0][D2-1:0]     a_ss,
  input  logic [R-1:0]              a_sign,
  input  logic [R-1:0][M-1:0]       a_mag,
  input  logic [NB-1:0][D1-1:0]     b_exp,
  input  logic [NS-1:0][D2-1:0]     b_ss,
  input  logic [R-1:0]              b_sign,
  input  logic [R-1:0][M-1:0]       b_mag,
  output logic                      out_valid,
  output logic [31:0]               result,
  output logic [$clog2(NB+1)-1:0]   flush_blocks
);
  localparam int unsigned SPB = K1 / K2;   // sub-blocks per block

  // input registers
  logic                  v_q;
  logic [NB-1:0][D1-1:0] a_exp_q, b_exp_q;
  logic [NS-1:0][D2-1:0] a_ss_q, b_ss_q;
  logic [R-1:0]          a_sign_q, b_sign_q;
  logic [R-1:0][M-1:0]   a_mag_q, b_mag_q;

  always_ff @(posedge clk) begin
    if (!rst_n) v_q <= 1'b0;
    else        v_q <= in_valid;
    if (in_valid) begin
      a_exp_q <= a_exp;  a_ss_q <= a_ss;  a_sign_q <= a_sign;  a_mag_q <= a_mag;
      b_exp_q <= b_exp;  b_ss_q <= b_ss;  b_sign_q <= b_sign;  b_mag_q <= b_mag;
    end
  end

  logic [NB-1:0][BW-1:0] blk_sum;
  logic [D1:0]           max_exp;
  logic [NB-1:0][D1:0]   diff;
  logic [NB-1:0][F-1:0]  aligned;
  logic [NB-1:0]         flushed;
  logic signed [SW-1:0]  total;
  logic [31:0]           fp;
  logic [$clog2(NB+1)-1:0] n_flush;

  for (genvar b = 0; b < int'(NB); b++) begin : g_blk
    mx_block_reduce #(.M(M), .K1(K1), .K2(K2), .D2(D2)) u_reduce (
      .a_sign(a_sign_q[b*K1 +: K1]), .a_mag(a_mag_q[b*K1 +: K1]), .a_ss(a_ss_q[b*SPB +: SPB]),
      .b_sign(b_sign_q[b*K1 +: K1]), .b_mag(b_mag_q[b*K1 +: K1]), .b_ss(b_ss_q[b*SPB +: SPB]),
      .sum   (blk_sum[b])
    );
    mx_block_align #(.W(BW), .F(F), .D1(D1)) u_align (
      .sum(blk_sum[b]), .diff(diff[b]), .aligned(aligned[b]), .flushed(flushed[b])
    );
  end

  mx_exp_align #(.NB(NB), .D1(D1)) u_exp (
    .a_exp(a_exp_q), .b_exp(b_exp_q), .max_exp(max_exp), .diff(diff)
  );

  always_comb begin
    total   = '0;
    n_flush = '0;
    for (int b = 0; b < int'(NB); b++) begin
      total   += SW'($signed(aligned[b]));
      n_flush += flushed[b];
    end
  end

  mx_fp32_convert #(.SW(SW), .EXPW(D1 + 1), .LSB_OFS(LSB_OFS)) u_cvt (
    .sum(total), .max_exp(max_exp), .result(fp)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v_q;
    if (v_q) begin
      result       <= fp;
      flush_blocks <= n_flush;
    end
  end

  initial begin
    assert (R % K1 == 0 && K1 % K2 == 0)
      else $error("mx_dot_product: R must be a multiple of K1 and K1 of K2");
  end
endmodule
