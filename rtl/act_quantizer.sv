// act_quantizer: requantize a row accumulator to the 4-bit fixed-point
// activation that the next layer consumes.
//
//   q = clip( (acc * scale + 2^(shift-1)) >> shift , 0, 2^A_BITS - 1 )
//
// scale is the row's unsigned multiplier; it folds the row's scaling factor
// alpha, the level step of the row's scheme (1/7 for Fixed-4, 1/127 for
// Fixed-8, 2^-6 for PoT-4) and the activation scales of this and the next
// layer into one integer. shift is the same for the whole layer. Rounding is
// round-half-up; negative results clip to zero, which is the ReLU.
// The clip-then-round quantizer and the 4-bit activation follow the paper;
// the integer form, rounding and ReLU are this design's own.
//
// Combinational; sat reports that the upper clip was taken.
module act_quantizer
  import rmsmp_pkg::*;
#(
  parameter int unsigned ACCW  = ACC_W,
  parameter int unsigned SCW   = SCALE_W,
  parameter int unsigned AB    = A_BITS
) (
  input  logic signed [ACCW-1:0] acc,
  input  logic [SCW-1:0]         scale,
  input  logic [SHIFT_W-1:0]     shift,
  output logic [AB-1:0]          q,
  output logic                   sat
);
  localparam int unsigned PW = ACCW + SCW + 1;
  logic signed [PW-1:0] prod, rnd, shifted;

  always_comb begin
    prod    = PW'(acc) * $signed({1'b0, scale});
    rnd     = (shift == '0) ? '0 : (PW'(1) <<< (shift - 1'b1));
    shifted = (prod + rnd) >>> shift;
    sat     = 1'b0;
    if (shifted < 0)                          q = '0;
    else if (shifted > PW'((1 << AB) - 1)) begin
      q   = '1;
      sat = 1'b1;
    end else                                  q = shifted[AB-1:0];
  end
endmodule
