// mx_lzc: leading-zero counter for two's-complement values.
//
// Counts how many bits below the sign bit repeat it, i.e. how far the value
// can be shifted left without overflow (leading zeros of a positive value,
// leading ones of a negative one, not counting the sign bit). 0 and -1 give
// W-1. The paper's pipeline figure names a leading zero counter on the block
// sums without giving its insides; this signed form is this design's choice.
// Purely combinational.
module mx_lzc #(
  parameter int unsigned W  = 20,
  localparam int unsigned CW = $clog2(W)
) (
  input  logic [W-1:0]  value,
  output logic [CW-1:0] count
);
  logic done;

  always_comb begin
    count = '0;
    done  = 1'b0;
    for (int i = int'(W) - 2; i >= 0; i--) begin
      if (!done && value[i] == value[W-1]) count = count + 1'b1;
      else done = 1'b1;
    end
  end
endmodule
