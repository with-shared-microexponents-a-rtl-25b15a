// mx_pkg: constants and helpers shared by the MX dot-product design.
//
// An MX block holds K1 elements. Each element is a sign bit and an M-bit
// magnitude read as a fixed-point number with one integer bit
// (value = mag / 2^(M-1)). The block carries one D1-bit shared exponent,
// biased like an FP32 exponent (bias 127), and every K2 consecutive
// elements share a D2-bit sub-block shift ss that divides them by 2^ss.
//   x = (-1)^sign * mag/2^(M-1) * 2^(E-127) * 2^(-ss)
// The three formats MX9, MX6 and MX4 differ only in their mantissa width
// (7, 4, 2 bits); k1 = 16, k2 = 2, d1 = 8, d2 = 1 for all of them, as the
// paper's format table gives. The hardware carries the widest mantissa (M = 7);
// narrower mantissas are stored left-aligned in that field, which keeps the
// value convention unchanged. The format codes are this design's own.
package mx_pkg;

  // Paper defaults (MX9 / MX6 / MX4 share all but the mantissa width).
  localparam int unsigned MX_M  = 7;   // widest mantissa (MX9)
  localparam int unsigned MX_K1 = 16;  // first-level block size
  localparam int unsigned MX_K2 = 2;   // second-level (sub-block) size
  localparam int unsigned MX_D1 = 8;   // shared exponent bits
  localparam int unsigned MX_D2 = 1;   // sub-block shift bits
  localparam int unsigned MX_R  = 64;  // dot product length (own choice)
  localparam int unsigned MX_F  = 25;  // fixed-point reduction width f


  typedef enum logic [1:0] {
    FMT_MX9 = 2'd0,
    FMT_MX6 = 2'd1,
    FMT_MX4 = 2'd2
  } mx_fmt_e;

  // Mantissa width of each format.
  function automatic int unsigned fmt_mant_bits(mx_fmt_e fmt);
    case (fmt)
      FMT_MX9: return 7;
      FMT_MX6: return 4;
      FMT_MX4: return 2;
      default: return 7;
    endcase
  endfunction

  typedef struct packed {
    logic       sign;
    logic [7:0] exp;
    logic [22:0] frac;
  } fp32_t;

endpackage
