// rtn_top_tb: end-to-end test of the ternary neuron engine at its default
// sizes (9216-code buffers, 4096-filter coefficient cache).
//
// For each job the testbench draws a ternary weight vector, stores it as
// 2-bit codes (zeros written as 00 or 01 at random), draws fixed-point
// activations and batch-norm parameters k, b, and loads the activations
// through the on-chip ternarizer with thresholds (0.5-b)/k and -(0.5+b)/k.
// Coefficients come from real alpha, gamma, beta, including values from a
// trained ResNet-18 layer: ag = alpha*gamma and C = alpha*beta*sum(W^t),
// both with 8 fractional bits. The reference computes the ternary codes,
// the dot product and z = ReLU(ag*dot + C) independently. Every fourth job
// loads its weights in full precision instead, ternarized on chip against
// the thresholds of a random weight transform k_W*W + b_W; z is also checked
// against the same formula in real arithmetic within the rounding bound.
// Each job must finish exactly len+3 cycles after its start. Job lengths
// cover 0, 1, ResNet-18's longest (4608) and the full buffer (9216). The
// test counts, and requires at least once: the 01 encoding of zero meeting a
// non-zero activation, a -1 product, a +1 product, each ternarizer outcome,
// a ReLU clamp, an empty job, a job started in the cycle
// after the previous done, and a load into the buffers and cache while a
// job runs, and weights ternarized on chip.
module rtn_top_tb;
  import rtn_pkg::*;

  localparam int unsigned DEPTH    = 9216;
  localparam int unsigned NUM_FILT = 4096;
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned LW = $clog2(DEPTH + 1);
  localparam int unsigned FW = $clog2(NUM_FILT);
  localparam real ONE = real'(1 << COEF_FRAC);

  logic clk = 1'b0;
  logic rst_n;
  logic w_we, a_we, cf_we, start;
  logic [AW-1:0] w_waddr, a_waddr, w_base, a_base;
  tcode_t w_wcode;
  logic w_fp_sel;
  logic signed [ACT_W-1:0] w_wdata, w_thr_hi, w_thr_lo;
  logic signed [ACT_W-1:0] a_wdata, thr_hi, thr_lo;
  logic [FW-1:0] cf_waddr, filt;
  coef_t cf_wdata;
  logic [LW-1:0] len;
  logic busy, done, z_relu_zero, z_sat;
  logic [ACC_W-1:0] z;
  logic signed [DOT_W-1:0] dot;

  rtn_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_zero01 = 0, n_negprod = 0, n_posprod = 0, n_enc_pos = 0, n_enc_neg = 0,
      n_enc_zero = 0, n_relu = 0, n_sat = 0, n_empty = 0, n_b2b = 0, n_load_busy = 0,
      n_wfp = 0;

  // reference copies of the buffers and the cache
  int    wref [DEPTH];
  bit    wz01 [DEPTH];   // weight was written as the 01 form of zero
  int    aref [DEPTH];
  coef_t cref [NUM_FILT];
  real   creal_ag [NUM_FILT];
  real   creal_c  [NUM_FILT];
  int    wsum_ref [NUM_FILT];

  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic write_weight(int ad, int v);
    tcode_t c;
    c = (v > 0) ? T_POS : (v < 0) ? T_NEG : (($urandom_range(1) == 1) ? T_ZERO1 : T_ZERO);
    w_we = 1'b1; w_waddr = AW'(ad); w_wcode = c;
    wref[ad] = v;
    wz01[ad] = (c == T_ZERO1);
    @(negedge clk);
    w_we = 1'b0;
  endtask

  // ternarize a fixed-point activation with BN parameters (reference rule)
  function automatic int tern_ref(int x, int hi, int lo);
    return (x > hi) ? 1 : (x < lo) ? -1 : 0;
  endfunction

  task automatic load_acts(int base, int n, real k, real b);
    int hi, lo, x;
    hi = $rtoi(((0.5 - b) / k) * real'(1 << ACT_FRAC));
    lo = -$rtoi(((0.5 + b) / k) * real'(1 << ACT_FRAC));
    thr_hi = ACT_W'(hi); thr_lo = ACT_W'(lo);
    for (int i = 0; i < n; i++) begin
      x = $urandom_range(0, 1600) - 800;
      a_we = 1'b1; a_waddr = AW'(base + i); a_wdata = ACT_W'(x);
      aref[base + i] = tern_ref(x, hi, lo);
      case (aref[base + i]) 1: n_enc_pos++; -1: n_enc_neg++; default: n_enc_zero++; endcase
      @(negedge clk);
    end
    a_we = 1'b0;
  endtask

  task automatic write_coef(int f, real alpha, real gamma, real beta, int wsum, longint cc_override);
    coef_t e;
    e.ag = COEF_W'($rtoi(alpha * gamma * ONE + 0.5));
    e.cc = (cc_override != 0) ? ACC_W'(cc_override)
                              : ACC_W'(longint'($floor(alpha * beta * real'(wsum) * ONE + 0.5)));
    cf_we = 1'b1; cf_waddr = FW'(f); cf_wdata = e;
    cref[f] = e;
    creal_ag[f] = alpha * gamma;
    creal_c[f]  = alpha * beta * real'(wsum);
    @(negedge clk);
    cf_we = 1'b0;
  endtask

  // run one job and check it; if b2b, start in the cycle right after done
  task automatic run_job(int wb, int ab, int n, int f, bit load_while_busy);
    longint t0, s, ez, zmax, p;
    int exp_dot;
    real zr, zg, tol;
    exp_dot = 0;
    for (int i = 0; i < n; i++) begin
      p = wref[wb + i] * aref[ab + i];
      exp_dot += int'(p);
      if (p < 0) n_negprod++;
      if (p > 0) n_posprod++;
    end
    if (n == 0) n_empty++;
    start = 1'b1; w_base = AW'(wb); a_base = AW'(ab); len = LW'(n); filt = FW'(f);
    t0 = cycle;
    @(negedge clk);
    start = 1'b0;
    if (load_while_busy) begin
      // write to addresses and a filter slot this job does not use
      w_we = 1'b1; w_waddr = AW'(DEPTH - 1); w_wcode = T_POS;
      a_we = 1'b1; a_waddr = AW'(DEPTH - 1); a_wdata = '0;
      cf_we = 1'b1; cf_waddr = FW'(NUM_FILT - 1); cf_wdata = '0;
      if (busy) n_load_busy++;
      @(negedge clk);
      w_we = 1'b0; a_we = 1'b0; cf_we = 1'b0;
    end
    while (!done) @(negedge clk);
    check($sformatf("latency len=%0d", n), cycle - t0, n + 3);
    check($sformatf("dot len=%0d", n), dot, exp_dot);
    zmax = (64'sd1 <<< ACC_W) - 1;
    s  = longint'(exp_dot) * longint'(cref[f].ag) + longint'(cref[f].cc);
    ez = (s < 0) ? 0 : (s > zmax) ? zmax : s;
    check("z", z, ez);
    check("relu flag", z_relu_zero, (s < 0));
    check("sat flag", z_sat, (s > zmax));
    if (s < 0) n_relu++;
    if (s > zmax) n_sat++;
    // against real arithmetic, when not saturated
    if (s <= zmax) begin
      zr = creal_ag[f] * real'(exp_dot) + creal_c[f];
      if (zr < 0.0) zr = 0.0;
      zg = real'(z) / ONE;
      tol = (real'((exp_dot < 0) ? -exp_dot : exp_dot) * 0.5 + 1.0) / ONE;
      checks++;
      if (zg - zr > tol || zr - zg > tol) begin
        failures++;
        $display("FAIL real z: got %f expected %f", zg, zr);
      end
    end
  endtask

  initial begin
    int wb, ab, n, f, wsum, lens[12];
    real k, b;
    rst_n = 1'b1;
    #1 rst_n = 1'b0; w_we = 0; a_we = 0; cf_we = 0; start = 0;
    w_waddr = '0; a_waddr = '0; w_wcode = T_ZERO;
    w_fp_sel = 1'b0; w_wdata = '0; w_thr_hi = '0; w_thr_lo = '0; a_wdata = '0; thr_hi = '0; thr_lo = '0;
    cf_waddr = '0; cf_wdata = '0; w_base = '0; a_base = '0; len = '0; filt = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    lens = '{1, 5, 37, 0, 200, 1000, 4608, 63, 9216, 300, 2, 777};
    for (int j = 0; j < 12; j++) begin
      n  = lens[j];
      wb = (n == DEPTH) ? 0 : $urandom_range(0, DEPTH - 2 - n);
      ab = (n == DEPTH) ? 0 : $urandom_range(0, DEPTH - 2 - n);
      f  = $urandom_range(0, NUM_FILT - 2);
      wsum = 0;
      if (j % 4 == 1) begin
        // full-precision weights, ternarized on chip with the thresholds of
        // a random weight transform k_W*W + b_W
        int whi, wlo;
        real kw, bw;
        kw = 0.5 + $urandom_range(0, 100) / 50.0;
        bw = ($signed($urandom_range(0, 100)) - 50) / 100.0;
        whi = $rtoi(((0.5 - bw) / kw) * real'(1 << ACT_FRAC));
        wlo = -$rtoi(((0.5 + bw) / kw) * real'(1 << ACT_FRAC));
        w_thr_hi = ACT_W'(whi); w_thr_lo = ACT_W'(wlo);
        for (int i = 0; i < n; i++) begin
          int x;
          x = $signed($urandom_range(0, 1600)) - 800;
          w_we = 1'b1; w_fp_sel = 1'b1; w_waddr = AW'(wb + i); w_wdata = ACT_W'(x);
          w_wcode = tcode_t'($urandom_range(3));   // must be ignored
          wref[wb + i] = tern_ref(x, whi, wlo);
          wz01[wb + i] = 1'b0;
          wsum += wref[wb + i];
          n_wfp++;
          @(negedge clk);
        end
        w_we = 1'b0; w_fp_sel = 1'b0;
      end else begin
        for (int i = 0; i < n; i++) begin
          int v;
          v = $urandom_range(0, 2) - 1;
          write_weight(wb + i, v);
          wsum += v;
        end
      end
      k = 0.5 + $urandom_range(0, 100) / 50.0;
      b = ($signed($urandom_range(0, 100)) - 50) / 100.0;
      load_acts(ab, n, k, b);
      case (j)
        // values of one trained ResNet-18 layer (layer4.1.conv1)
        6: write_coef(f, 1.8244, 2.4687, 1.4774, wsum, 0);
        // unit scale, no offset: z equals the dot product
        8: write_coef(f, 1.0, 1.0, 0.0, wsum, 0);
        // strongly negative offset forces the ReLU clamp
        9: write_coef(f, 1.0, 0.5, -50.0, (wsum == 0) ? 1 : ((wsum < 0) ? -wsum : wsum), 0);
        default: write_coef(f, 0.5 + $urandom_range(0, 100) / 40.0,
                            0.7 + $urandom_range(0, 100) / 60.0,
                            ($signed($urandom_range(0, 100)) - 50) / 50.0, wsum, 0);
      endcase
      // make every non-zero product of the 9216-element job +1
      if (j == 8) begin
        for (int i = 0; i < n; i++) if (aref[ab + i] != 0) write_weight(wb + i, aref[ab + i]);
      end
      // count zero-weights encoded as 01 meeting a non-zero activation
      for (int i = 0; i < n; i++)
        if (wref[wb + i] == 0 && aref[ab + i] != 0 && wz01[wb + i]) n_zero01++;
      run_job(wb, ab, n, f, (j == 5));
      // back-to-back: rerun the same job in the cycle right after done
      if (j == 2 || j == 7) begin
        n_b2b++;
        run_job(wb, ab, n, f, 1'b0);
      end
      @(negedge clk);
    end

    $display("mechanisms: zero01=%0d negprod=%0d posprod=%0d enc+=%0d enc-=%0d enc0=%0d relu=%0d sat=%0d empty=%0d b2b=%0d load_busy=%0d wfp=%0d",
             n_zero01, n_negprod, n_posprod, n_enc_pos, n_enc_neg, n_enc_zero, n_relu, n_sat,
             n_empty, n_b2b, n_load_busy, n_wfp);
    check("seen zero01", n_zero01 > 0, 1);
    check("seen negprod", n_negprod > 0, 1);
    check("seen posprod", n_posprod > 0, 1);
    check("seen enc+", n_enc_pos > 0, 1);
    check("seen enc-", n_enc_neg > 0, 1);
    check("seen enc0", n_enc_zero > 0, 1);
    check("seen relu", n_relu > 0, 1);
    // n_sat stays 0: at the default widths |ag*dot| < 2**29 and C < 2**47,
    // so the sum cannot pass the output range; reparam_mac_tb covers it.
    check("no saturation", n_sat, 0);
    check("seen empty", n_empty > 0, 1);
    check("seen b2b", n_b2b > 0, 1);
    check("seen load while busy", n_load_busy > 0, 1);
    check("seen weights ternarized on chip", n_wfp > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
