// rtn_layer_tb: runs the quantized layers of ResNet-18 through the engine.
//
// For each of the 19 ternary layers of ResNet-18 the test takes the trained
// activation scale gamma, offset beta and mean weight scale alpha reported
// for that network, and the layer's dot-product length c*k*k (64*3*3 = 576
// up to 512*3*3 = 4608, and 64/128/256 for the 1x1 downsample layers). It
// then computes FILTERS output neurons of one output position: random
// ternary weights per filter, one random im2col activation column per layer
// ternarized on chip with the plain thresholds +-0.5 (k = 1, b = 0), and
// C = alpha*beta*sum(W^t) per filter. Each z is checked against an
// independent fixed-point reference and against real arithmetic within the
// rounding bound; each job must take len+3 cycles. The fraction of outputs
// clamped to zero by the ReLU is printed per layer. Default sizes, no
// parameter overrides.
module rtn_layer_tb;
  import rtn_pkg::*;

  localparam int unsigned DEPTH    = 9216;
  localparam int unsigned NUM_FILT = 4096;
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned LW = $clog2(DEPTH + 1);
  localparam int unsigned FW = $clog2(NUM_FILT);
  localparam real ONE = real'(1 << COEF_FRAC);
  localparam int FILTERS = 8;
  localparam int NL = 19;

  // per layer: dot length, gamma, beta, mean alpha
  int  lay_len [NL] = '{576, 576, 576, 576, 576, 1152, 64, 1152, 1152,
                        1152, 2304, 128, 2304, 2304, 2304, 4608, 256, 4608, 4608};
  real lay_g   [NL] = '{1.0426, 0.9729, 1.0223, 0.7962, 1.3083, 0.8191, 1.0000, 1.4091, 0.7678,
                        1.3986, 0.8916, 0.9996, 1.6719, 1.0112, 2.0472, 1.1033, 1.0037, 2.4687, 0.8959};
  real lay_b   [NL] = '{-0.0308, -0.2344, 0.1699, 0.0956, 0.5152, 0.6840, -0.0024, 0.3080, 0.4921,
                        0.8014, 0.7033, 0.0000, 0.4738, 0.4731, 1.4202, 0.9717, 0.0000, 1.4774, 0.7186};
  real lay_a   [NL] = '{1.8160, 1.0974, 2.0325, 1.6872, 3.0458, 1.5639, 0.8739, 1.4284, 2.3644,
                        2.7552, 1.6015, 0.9435, 2.9345, 2.1110, 3.0216, 1.7116, 0.8537, 1.8244, 2.3379};

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
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int wref [DEPTH];
  int aref [DEPTH];

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
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

  initial begin
    int n, wsum, v, x, zeros, exp_dot;
    longint s, ez, t0, ag, cc;
    real zr, zg, tol;
    coef_t e;
    rst_n = 1'b1;
    #1 rst_n = 1'b0; w_we = 0; a_we = 0; cf_we = 0; start = 0;
    w_waddr = '0; a_waddr = '0; w_wcode = T_ZERO;
    w_fp_sel = 1'b0; w_wdata = '0; w_thr_hi = '0; w_thr_lo = '0; a_wdata = '0;
    cf_waddr = '0; cf_wdata = '0; w_base = '0; a_base = '0; len = '0; filt = '0;
    thr_hi = ACT_W'(1 << (ACT_FRAC - 1));     // +0.5
    thr_lo = -ACT_W'(1 << (ACT_FRAC - 1));    // -0.5
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    for (int l = 0; l < NL; l++) begin
      n = lay_len[l];
      // one im2col column of activations, roughly +-2 wide
      for (int i = 0; i < n; i++) begin
        x = $signed($urandom_range(0, 1024)) - 512;
        a_we = 1'b1; a_waddr = AW'(i); a_wdata = ACT_W'(x);
        aref[i] = (x > 128) ? 1 : (x < -128) ? -1 : 0;
        @(negedge clk);
      end
      a_we = 1'b0;
      zeros = 0;
      for (int f = 0; f < FILTERS; f++) begin
        wsum = 0;
        for (int i = 0; i < n; i++) begin
          v = $signed($urandom_range(0, 2)) - 1;
          w_we = 1'b1; w_waddr = AW'(i);
          w_wcode = (v > 0) ? T_POS : (v < 0) ? T_NEG : T_ZERO;
          wref[i] = v; wsum += v;
          @(negedge clk);
        end
        w_we = 1'b0;
        ag = longint'($rtoi(lay_a[l] * lay_g[l] * ONE + 0.5));
        cc = longint'($floor(lay_a[l] * lay_b[l] * real'(wsum) * ONE + 0.5));
        e.ag = COEF_W'(ag); e.cc = ACC_W'(cc);
        cf_we = 1'b1; cf_waddr = FW'(l * FILTERS + f); cf_wdata = e;
        @(negedge clk);
        cf_we = 1'b0;
        exp_dot = 0;
        for (int i = 0; i < n; i++) exp_dot += wref[i] * aref[i];
        start = 1'b1; w_base = '0; a_base = '0; len = LW'(n); filt = FW'(l * FILTERS + f);
        t0 = cycle;
        @(negedge clk);
        start = 1'b0;
        while (!done) @(negedge clk);
        check("latency", cycle - t0, n + 3);
        check("dot", dot, exp_dot);
        s  = longint'(exp_dot) * ag + cc;
        ez = (s < 0) ? 0 : s;
        check("z", z, ez);
        if (ez == 0) zeros++;
        zr = lay_a[l] * lay_g[l] * real'(exp_dot) + lay_a[l] * lay_b[l] * real'(wsum);
        if (zr < 0.0) zr = 0.0;
        zg = real'(z) / ONE;
        tol = (real'((exp_dot < 0) ? -exp_dot : exp_dot) * 0.5 + 1.0) / ONE;
        checks++;
        if (zg - zr > tol || zr - zg > tol) begin
          failures++;
          $display("FAIL layer %0d filter %0d real z: got %f expected %f", l, f, zg, zr);
        end
      end
      $display("layer %0d: len=%0d gamma=%f beta=%f alpha=%f zero outputs %0d of %0d",
               l, n, lay_g[l], lay_b[l], lay_a[l], zeros, FILTERS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
