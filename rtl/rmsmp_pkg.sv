// rmsmp_pkg: types and constants shared by the row-wise mixed-scheme,
// multi-precision GEMM accelerator.
//
// Each row (filter) of a layer's weight matrix is quantized with one of three
// scheme/precision pairs: 4-bit power-of-two (PoT-W4A4), 4-bit fixed-point
// (Fixed-W4A4) or 8-bit fixed-point (Fixed-W8A4). Activations are always
// 4-bit fixed-point. The three pairs and the 4-bit activation width follow
// the paper; the integer encodings below are this design's own:
//   Fixed-m : two's complement integer level k, |k| <= 2^(m-1)-1,
//             real weight = alpha * k / (2^(m-1)-1)
//   PoT-4   : {sign, e[2:0]}, e = 0 is zero, otherwise
//             real weight = +-alpha * 2^(e-7)   (levels 2^-6 .. 2^0)
//   A4      : unsigned integer 0..15 (post-ReLU)
package rmsmp_pkg;

  typedef enum logic [1:0] {
    SCH_POT4 = 2'd0,
    SCH_FIX4 = 2'd1,
    SCH_FIX8 = 2'd2
  } scheme_e;

  localparam int unsigned A_BITS  = 4;   // activation precision (all schemes)
  localparam int unsigned ACC_W   = 25;  // row accumulator: 4608 * 127 * 15 < 2^24
  localparam int unsigned SCALE_W = 16;  // per-row requantization multiplier
  localparam int unsigned SHIFT_W = 6;   // per-layer requantization shift

  // Weight width of a scheme.
  function automatic int unsigned w_bits(scheme_e s);
    return (s == SCH_FIX8) ? 8 : 4;
  endfunction

  // Product width of a scheme: signed product of a weight and an unsigned
  // activation. PoT: a << 6 at most, plus sign.
  function automatic int unsigned p_bits(scheme_e s);
    case (s)
      SCH_POT4: return A_BITS + 7;
      SCH_FIX4: return 4 + A_BITS + 1;
      default:  return 8 + A_BITS + 1;
    endcase
  endfunction

endpackage
