// ternary_dot_tb: self-checking test of the popcount dot-product circuit.
// Random ternary vectors (both encodings of zero included) are fed one pair
// per cycle; the result, and both counters, are compared with a sum of
// integer products computed in the testbench. Also checks that a clear with
// en counts the presented pair as the first element, and that results are
// ready one cycle after the last pair (no extra latency).
module ternary_dot_tb;
  import rtn_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  logic clear, en;
  tcode_t w, a;
  logic [CNT_W-1:0] cnt_nz, cnt_neg;
  logic signed [CNT_W:0] result;
  int checks = 0, failures = 0;

  ternary_dot dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic tcode_t rand_code();
    return tcode_t'($urandom_range(3));
  endfunction

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int exp_dot, exp_nz, exp_neg, n;
    rst_n = 1'b1;
    #1 rst_n = 1'b0; clear = 1'b0; en = 1'b0; w = T_ZERO; a = T_ZERO;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check("reset counters", result, 0);

    // The four hand cases of the encoding table, one pair each
    for (int wi = 0; wi < 4; wi++)
      for (int ai = 0; ai < 4; ai++) begin
        w = tcode_t'(wi); a = tcode_t'(ai);
        clear = 1'b1; en = 1'b1;
        @(negedge clk);
        clear = 1'b0; en = 1'b0;
        check($sformatf("pair %b*%b", wi[1:0], ai[1:0]), result, tval(w) * tval(a));
      end

    // Random vectors; the first pair of each vector enters with clear
    for (int t = 0; t < 300; t++) begin
      n = (t < 5) ? t + 1 : $urandom_range(1, 300);
      if (t == 299) n = 4608;
      exp_dot = 0; exp_nz = 0; exp_neg = 0;
      for (int i = 0; i < n; i++) begin
        w = rand_code(); a = rand_code();
        if (t == 299) begin w = T_POS; a = (i % 3 == 0) ? T_POS : T_NEG; end
        clear = (i == 0); en = 1'b1;
        exp_dot += tval(w) * tval(a);
        exp_nz  += (w.nz && a.nz);
        exp_neg += (w.nz && a.nz && (w.sign != a.sign));
        @(negedge clk);
      end
      clear = 1'b0; en = 1'b0;
      // one idle cycle with random inputs: must not disturb the result
      w = rand_code(); a = rand_code();
      check("dot", result, exp_dot);
      check("cnt_nz", cnt_nz, exp_nz);
      check("cnt_neg", cnt_neg, exp_neg);
      @(negedge clk);
      check("dot held", result, exp_dot);
    end

    // clear without en empties the counters
    clear = 1'b1; en = 1'b0;
    @(negedge clk);
    clear = 1'b0;
    check("clear only", result, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
