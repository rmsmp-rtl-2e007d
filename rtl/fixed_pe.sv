// fixed_pe: multiply one W_BITS-bit fixed-point weight by one 4-bit
// activation.
//
// The weight is a two's complement integer level (|w| <= 2^(W_BITS-1)-1 for
// a symmetric fixed-point quantizer), the activation an unsigned integer.
// The product is a signed integer of W_BITS+A_BITS+1 bits. On an FPGA this is
// the operation mapped onto DSP slices; here it is a plain multiplier.
// W_BITS = 4 serves Fixed-W4A4 rows, W_BITS = 8 serves Fixed-W8A4 rows, as in
// the paper; encodings are this design's own.
//
// Purely combinational.
module fixed_pe #(
  parameter int unsigned W_BITS = 4,
  parameter int unsigned A_BITS = 4
) (
  input  logic signed [W_BITS-1:0]        w,
  input  logic [A_BITS-1:0]               a,
  output logic signed [W_BITS+A_BITS:0]   p
);
  always_comb p = w * $signed({1'b0, a});
endmodule
