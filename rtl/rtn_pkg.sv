// rtn_pkg: types and constants shared by the reparameterized ternary network
// (RTN) datapath.
//
// A ternary value {-1, 0, +1} is carried as two bits. The first bit (bit 1,
// the left one when printed) says whether the value is non-zero. The second
// bit (bit 0) gives its sign, 1 for +1 and 0 for -1:
//   00 -> 0, 01 -> 0, 10 -> -1, 11 -> +1
// Zero therefore has two encodings. Every block that consumes codes must
// treat 01 exactly like 00. This encoding is the one the RTN method defines.
// The fixed-point formats below are this implementation's own choice.
package rtn_pkg;

  // Two-bit ternary code; field order gives {first bit, second bit}.
  typedef struct packed {
    logic nz;    // first bit: 1 = value is non-zero
    logic sign;  // second bit: 1 = positive, 0 = negative (ignored when nz = 0)
  } tcode_t;

  localparam tcode_t T_ZERO  = 2'b00;
  localparam tcode_t T_ZERO1 = 2'b01;  // alternative encoding of zero
  localparam tcode_t T_NEG   = 2'b10;
  localparam tcode_t T_POS   = 2'b11;

  // Width of each of the two popcount counters of the dot-product circuit.
  localparam int unsigned CNT_W = 32;
  // Signed dot-product result: count - 2*count needs one bit more.
  localparam int unsigned DOT_W = CNT_W + 1;

  // Fixed-point format of full-precision activations and thresholds
  // (two's complement, ACT_FRAC fractional bits).
  localparam int unsigned ACT_W    = 16;
  localparam int unsigned ACT_FRAC = 8;

  // Format of the per-filter scale alpha*gamma (two's complement).
  localparam int unsigned COEF_W    = 16;
  localparam int unsigned COEF_FRAC = 8;

  // Width of the pre-stored constant C and of the output z; both carry
  // COEF_FRAC fractional bits.
  localparam int unsigned ACC_W = 48;

  // One entry of the per-filter coefficient cache.
  typedef struct packed {
    logic signed [COEF_W-1:0] ag;  // alpha * gamma, COEF_FRAC fractional bits
    logic signed [ACC_W-1:0]  cc;  // C = alpha * beta * sum(W^t), COEF_FRAC fractional bits
  } coef_t;

  // Value of a code as an integer (used by checks and models).
  function automatic int tval(tcode_t c);
    return c.nz ? (c.sign ? 1 : -1) : 0;
  endfunction

endpackage
