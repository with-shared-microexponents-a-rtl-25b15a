// mx_dot_top: FP32-in, FP32-out MX dot-product engine.
//
// Two FP32 vectors a and b of R elements are quantized by hardware into MX
// blocks (R/K1 mx_quantizer instances per operand) in the format selected
// by 'fmt' (MX9, MX6 or MX4; may change every operation), multiplied and
// reduced by mx_dot_product, and accumulated in FP32 by mx_fp32_acc.
// The quantizers are combinational and feed the dot product's input
// register, so:
//   cycle 0  in_valid, fmt, acc_clear, a, b presented
//   cycle 2  dot_valid with the FP32 dot product on dot
//   cycle 3  acc_valid with the accumulator on acc
// One operation can start every clock. acc_clear travels with its
// operation and makes that dot product the first term of a new sum.
// sat_count and flush_blocks report, with dot, how many elements the
// quantizers clamped and how many blocks fell below the alignment frame.
// Quantizing both operands before the multiply, and using one pipeline for
// all three formats, follow the paper; the register placement, the
// accumulate-clear control and the status outputs are this design's own.
// Reset: synchronous, active low.
module mx_dot_top
  import mx_pkg::*;
#(
  parameter int unsigned M  = MX_M,
  parameter int unsigned K1 = MX_K1,
  parameter int unsigned K2 = MX_K2,
  parameter int unsigned D1 = MX_D1,
  parameter int unsigned D2 = MX_D2,
  parameter int unsigned R  = MX_R,
  parameter int unsigned F  = MX_F,
  localparam int unsigned NB  = R / K1,
  localparam int unsigned NS  = R / K2,
  localparam int unsigned SPB = K1 / K2,
  localparam int unsigned QCW = $clog2(K1 + 1),
  localparam int unsigned SCW = $clog2(2*R + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  mx_fmt_e                 fmt,
  input  logic                    acc_clear,
  input  logic [R-1:0][31:0]      a,
  input  logic [R-1:0][31:0]      b,
  output logic                    dot_valid,
  output logic [31:0]             dot,
  output logic [SCW-1:0]          sat_count,
  output logic [$clog2(NB+1)-1:0] flush_blocks,
  output logic                    acc_valid,
  output logic [31:0]             acc
);
  logic [NB-1:0][D1-1:0]  a_exp, b_exp;
  logic [NS-1:0][D2-1:0]  a_ss, b_ss;
  logic [R-1:0]           a_sign, b_sign;
  logic [R-1:0][M-1:0]    a_mag, b_mag;
  logic [NB-1:0][QCW-1:0] a_nsat, b_nsat;
  logic [SCW-1:0]         nsat_in;

  for (genvar q = 0; q < int'(NB); q++) begin : g_q
    mx_quantizer #(.M(M), .K1(K1), .K2(K2), .D1(D1), .D2(D2)) u_qa (
      .fmt(fmt), .x(a[q*K1 +: K1]), .shared_exp(a_exp[q]), .sub_shift(a_ss[q*SPB +: SPB]),
      .sign(a_sign[q*K1 +: K1]), .mag(a_mag[q*K1 +: K1]), .n_sat(a_nsat[q])
    );
    mx_quantizer #(.M(M), .K1(K1), .K2(K2), .D1(D1), .D2(D2)) u_qb (
      .fmt(fmt), .x(b[q*K1 +: K1]), .shared_exp(b_exp[q]), .sub_shift(b_ss[q*SPB +: SPB]),
      .sign(b_sign[q*K1 +: K1]), .mag(b_mag[q*K1 +: K1]), .n_sat(b_nsat[q])
    );
  end

  always_comb begin
    nsat_in = '0;
    for (int q = 0; q < int'(NB); q++) nsat_in += SCW'(a_nsat[q]) + SCW'(b_nsat[q]);
  end

  mx_dot_product #(.M(M), .K1(K1), .K2(K2), .D1(D1), .D2(D2), .R(R), .F(F)) u_dot (
    .clk, .rst_n, .in_valid,
    .a_exp, .a_ss, .a_sign, .a_mag,
    .b_exp, .b_ss, .b_sign, .b_mag,
    .out_valid(dot_valid), .result(dot), .flush_blocks
  );

  // side-band that travels with each operation through the two dot stages
  logic [1:0]           clr_p;
  logic [1:0][SCW-1:0]  sat_p;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      clr_p <= '0;
      sat_p <= '0;
    end else begin
      clr_p <= {clr_p[0], acc_clear & in_valid};
      sat_p <= {sat_p[0], in_valid ? nsat_in : SCW'(0)};
    end
  end
  assign sat_count = sat_p[1];

  mx_fp32_acc u_acc (
    .clk, .rst_n, .clear(clr_p[1]), .in_valid(dot_valid), .in(dot),
    .acc, .acc_valid
  );
endmodule
