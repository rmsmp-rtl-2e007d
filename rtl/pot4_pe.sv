// pot4_pe: multiply one 4-bit power-of-two (PoT) weight by one 4-bit
// activation with a shift instead of a multiplier.
//
// The weight is {sign, e[2:0]}. e = 0 encodes zero; e = 1..7 encodes the
// magnitude 2^(e-7), i.e. the PoT level set +-{0, 2^-6, ..., 2^0} of a
// 4-bit PoT quantizer. The product is returned in units of 2^-6, so the
// magnitude is a << (e-1) and the result is a signed integer of A_BITS+7
// bits. The level set follows the paper; the bit encoding and the choice of
// an unsigned activation are this design's own.
//
// Purely combinational.
module pot4_pe #(
  parameter int unsigned A_BITS = 4
) (
  input  logic [3:0]              w,
  input  logic [A_BITS-1:0]       a,
  output logic signed [A_BITS+6:0] p
);
  logic [A_BITS+5:0] mag;

  always_comb begin
    if (w[2:0] == 3'd0) mag = '0;
    else                mag = {6'd0, a} << (w[2:0] - 3'd1);
    p = w[3] ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
  end
endmodule
