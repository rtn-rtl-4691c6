// ternary_encoder_tb: self-checking test of the BN-folded ternarizer.
// Sweeps activations around random threshold pairs, including the values
// exactly at each threshold (which must map to 0), and compares the code
// with the rule +1 above thr_hi, -1 below thr_lo, 0 otherwise. Also checks
// thresholds derived from batch-norm parameters k and b in real arithmetic:
// the code must equal round-to-ternary of k*A + b.
module ternary_encoder_tb;
  import rtn_pkg::*;

  logic signed [ACT_W-1:0] act, thr_hi, thr_lo;
  tcode_t code;
  int checks = 0, failures = 0;
  int n_pos = 0, n_neg = 0, n_zero = 0;

  ternary_encoder dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_code(tcode_t exp);
    checks++;
    if (code !== exp) begin
      failures++;
      $display("FAIL act=%0d hi=%0d lo=%0d: code %b expected %b", act, thr_hi, thr_lo, code, exp);
    end
    if (exp == T_POS) n_pos++; else if (exp == T_NEG) n_neg++; else n_zero++;
  endtask

  initial begin
    int hi, lo, x;
    real k, b, abar, one;
    one = real'(1 << ACT_FRAC);
    // random thresholds, activations near them
    for (int t = 0; t < 2000; t++) begin
      lo = $urandom_range(0, 2000) - 1500;
      hi = lo + $urandom_range(0, 1500);
      thr_hi = ACT_W'(hi); thr_lo = ACT_W'(lo);
      case (t % 5)
        0: x = hi;
        1: x = lo;
        2: x = hi + 1;
        3: x = lo - 1;
        default: x = $urandom_range(0, 6000) - 3000;
      endcase
      act = ACT_W'(x);
      #1;
      check_code((x > hi) ? T_POS : (x < lo) ? T_NEG : T_ZERO);
    end
    // thresholds from BN parameters: thr_hi = (0.5-b)/k, thr_lo = -(0.5+b)/k
    for (int t = 0; t < 2000; t++) begin
      k = 0.25 + $urandom_range(0, 1000) / 400.0;
      b = ($signed($urandom_range(0, 1000)) - 500) / 500.0;
      thr_hi = ACT_W'($rtoi(((0.5 - b) / k) * one));
      thr_lo = ACT_W'(-$rtoi(((0.5 + b) / k) * one));
      x = $urandom_range(0, 2000) - 1000;
      act = ACT_W'(x);
      #1;
      // skip the rare samples where fixed-point rounding of the thresholds
      // decides the outcome
      abar = k * (real'(x) / one) + b;
      if ((abar > 0.5 + 0.02 * k) || (abar < -0.5 - 0.02 * k) ||
          ((abar < 0.5 - 0.02 * k) && (abar > -0.5 + 0.02 * k)))
        check_code((abar > 0.5) ? T_POS : (abar < -0.5) ? T_NEG : T_ZERO);
    end
    checks++;
    if (n_pos == 0 || n_neg == 0 || n_zero == 0) begin
      failures++;
      $display("FAIL coverage: pos=%0d neg=%0d zero=%0d", n_pos, n_neg, n_zero);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
