// mx_block_align: places one block sum into the f-bit fixed-point frame of
// the block with the largest exponent.
//
// The W-bit block sum is first normalised: mx_lzc counts its redundant sign
// bits lz and the sum is shifted left by lz, which lowers its exponent by lz.
// The alignment shift is then the subtract max_exp - (block_exp - lz)
// = diff + lz. The normalised sum is placed at the top of an F-bit word and
// arithmetically shifted right by that amount; bits that fall below the
// frame are dropped (truncation towards minus infinity). The net effect is
//   aligned = floor(sum * 2^(F-W) / 2^diff).
// 'flushed' flags a non-zero block whose significant bits were all shifted
// out. The paper names the leading zero counter, the subtract and the shift
// and says block results are "normalized to the largest element"; how the
// three combine is this design's choice. Purely combinational.
module mx_block_align #(
  parameter int unsigned W  = 20,
  parameter int unsigned F  = mx_pkg::MX_F,
  parameter int unsigned D1 = mx_pkg::MX_D1,
  localparam int unsigned CW = $clog2(W),
  localparam int unsigned SH = (D1 + 2 > CW + 1) ? D1 + 2 : CW + 1
) (
  input  logic signed [W-1:0] sum,
  input  logic        [D1:0]  diff,
  output logic signed [F-1:0] aligned,
  output logic                flushed
);
  logic [CW-1:0]       lz;
  logic [W-1:0]        norm;
  logic [SH-1:0]       shamt;
  logic signed [F-1:0] framed;

  mx_lzc #(.W(W)) u_lzc (.value(sum), .count(lz));

  always_comb begin
    norm    = sum << lz;
    shamt   = SH'(diff) + SH'(lz);
    framed  = $signed({norm, {(F-W){1'b0}}});
    if (shamt >= SH'(F)) aligned = {F{framed[F-1]}};
    else                 aligned = framed >>> shamt;
    flushed = (sum != '0) && (shamt >= SH'(F - 1));
  end

  initial begin
    assert (F >= W) else $error("mx_block_align: F must be at least W");
  end
endmodule
