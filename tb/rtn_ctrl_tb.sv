// rtn_ctrl_tb: self-checking test of the job sequencer.
// Starts jobs of random length and base addresses (len = 0 included) and
// checks, cycle by cycle, against a reference timeline: the read addresses
// step from each base once per cycle for len cycles, dot_en follows buf_re
// one cycle later, dot_clear and cf_re come only with the accepted start,
// mac_go comes exactly once in cycle len+2, and busy covers cycles 1 ..
// len+2. A start raised while busy would be an assertion error, so the
// test waits for busy to fall.
module rtn_ctrl_tb;
  localparam int unsigned DEPTH = 512;
  localparam int unsigned NUM_FILT = 16;
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned LW = $clog2(DEPTH + 1);
  localparam int unsigned FW = $clog2(NUM_FILT);

  logic clk = 1'b0;
  logic rst_n;
  logic start;
  logic [AW-1:0] w_base, a_base;
  logic [LW-1:0] len;
  logic [FW-1:0] filt;
  logic busy, buf_re, cf_re, dot_clear, dot_en, mac_go;
  logic [AW-1:0] w_raddr, a_raddr;
  logic [FW-1:0] cf_raddr;
  int checks = 0, failures = 0;

  rtn_ctrl #(.DEPTH(DEPTH), .NUM_FILT(NUM_FILT)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int n, wb, ab, f;
    rst_n = 1'b1;
    #1 rst_n = 1'b0; start = 1'b0; w_base = '0; a_base = '0; len = '0; filt = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check("idle busy", busy, 0);
    for (int t = 0; t < 200; t++) begin
      n  = (t < 3) ? t : $urandom_range(0, 100);
      wb = $urandom_range(0, DEPTH - 1 - n);
      ab = $urandom_range(0, DEPTH - 1 - n);
      f  = $urandom_range(0, NUM_FILT - 1);
      // a controller still busy here has overrun its job: count it and wait
      // for idle, so that the start below stays legal
      if (busy) begin
        check("busy before start", busy, 0);
        while (busy) @(negedge clk);
      end
      // cycle 0: start
      start = 1'b1; w_base = AW'(wb); a_base = AW'(ab); len = LW'(n); filt = FW'(f);
      #1;
      check("cf_re at start", cf_re, 1);
      check("cf_raddr", cf_raddr, f);
      check("dot_clear at start", dot_clear, 1);
      check("busy at start", busy, 0);
      @(negedge clk);
      start = 1'b0;
      w_base = AW'($urandom); a_base = AW'($urandom); len = LW'($urandom); filt = FW'($urandom);
      // cycles 1 .. len+2
      for (int c = 1; c <= n + 2; c++) begin
        check($sformatf("busy c%0d", c), busy, 1);
        check($sformatf("buf_re c%0d", c), buf_re, (c <= n) ? 1 : 0);
        if (c <= n) begin
          check("w_raddr", w_raddr, wb + c - 1);
          check("a_raddr", a_raddr, ab + c - 1);
        end
        check($sformatf("dot_en c%0d", c), dot_en, (c >= 2 && c <= n + 1) ? 1 : 0);
        check($sformatf("mac_go c%0d", c), mac_go, (c == n + 2) ? 1 : 0);
        check("no clear", dot_clear, 0);
        check("no cf_re", cf_re, 0);
        @(negedge clk);
      end
      check("idle after job", busy, 0);
      check("no mac after job", mac_go, 0);
      check("no en after job", dot_en, 0);
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
