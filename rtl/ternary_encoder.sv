// ternary_encoder: ternarizes one full-precision activation into the 2-bit
// ternary code.
//
// The RTN quantizer applies a batch-norm affine map k*A + b and then rounds
// to +1 when the result exceeds 0.5, to -1 when it is below -0.5 and to 0
// otherwise. For k > 0 this is the same as comparing A itself with two
// thresholds:
//   A >  thr_hi = (0.5 - b) / k   -> +1  (code 11)
//   A <  thr_lo = -(0.5 + b) / k  -> -1  (code 10)
//   otherwise                     ->  0  (code 00)
// The thresholds are computed off-line from the learned k and b and given
// here as fixed-point numbers in the same format as A. Folding the batch norm
// into two comparisons follows the method; the fixed-point format, the strict
// comparisons and the choice of 00 for zero are this implementation's own.
// A negative k swaps the two outcomes; the caller must then swap and negate the
// thresholds, and this block does not do that.
// The same block can ternarize weights, with thresholds derived from k_W, b_W.
//
// Purely combinational.
module ternary_encoder
  import rtn_pkg::*;
#(
  parameter int unsigned W = ACT_W  // width of activation and thresholds
) (
  input  logic signed [W-1:0] act,
  input  logic signed [W-1:0] thr_hi,
  input  logic signed [W-1:0] thr_lo,
  output tcode_t              code
);

  always_comb begin
    if (act > thr_hi)      code = T_POS;
    else if (act < thr_lo) code = T_NEG;
    else                   code = T_ZERO;
  end

endmodule
