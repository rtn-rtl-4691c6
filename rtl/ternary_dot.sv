// ternary_dot: bit-serial dot product of two ternary vectors.
//
// Each cycle with en = 1 one weight code w and one activation code a enter.
// The circuit forms c = w.nz & a.nz (both non-zero) and
// n = (w.sign ^ a.sign) & c (product is -1). One counter counts c, the other
// counts n. Since a product of two non-zero ternaries is +1 or -1,
//   sum(w*a) = popcount(c) - 2*popcount(n),
// and the result is the first counter minus the second counter shifted left
// by one bit. The gates, the two 32-bit counters, the shift by 1 and the
// subtractor are the structure the RTN method proposes; the clear/enable
// control is this implementation's own.
//
// Interface:
//   clear  - synchronous: counters restart. If en is also high, the element
//            presented in that cycle becomes the first one counted.
//   en     - count the element pair on w/a at the next rising edge.
//   result - combinational from the counters: the dot product of all pairs
//            counted since the last clear, valid the cycle after the last
//            en. Signed, CNT_W+1 bits, so it is exact for any count that
//            fits the counters.
// Timing: one element pair per cycle, no pipeline latency beyond the counter
// register.
module ternary_dot
  import rtn_pkg::*;
#(
  parameter int unsigned W = CNT_W  // counter width
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               en,
  input  tcode_t             w,
  input  tcode_t             a,
  output logic [W-1:0]       cnt_nz,   // popcount(c)
  output logic [W-1:0]       cnt_neg,  // popcount((W2 ^ A2) & c)
  output logic signed [W:0]  result
);

  logic c_bit, n_bit;

  always_comb begin
    c_bit = w.nz & a.nz;
    n_bit = (w.sign ^ a.sign) & c_bit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_nz  <= '0;
      cnt_neg <= '0;
    end else if (clear) begin
      cnt_nz  <= W'(en & c_bit);
      cnt_neg <= W'(en & n_bit);
    end else if (en) begin
      cnt_nz  <= cnt_nz + W'(c_bit);
      cnt_neg <= cnt_neg + W'(n_bit);
    end
  end

  // Shift the negative count left by one bit and subtract.
  always_comb begin
    result = $signed({1'b0, cnt_nz}) - $signed({cnt_neg, 1'b0});
  end

endmodule
