// coef_cache_tb: self-checking test of the per-filter coefficient store.
// Writes random alpha*gamma and C values to every filter slot of a reduced
// cache, then reads them back in random order and checks both fields, the
// one-cycle read latency and that rdata holds while re is low.
module coef_cache_tb;
  import rtn_pkg::*;

  localparam int unsigned NUM_FILT = 64;
  localparam int unsigned AW = $clog2(NUM_FILT);

  logic clk = 1'b0;
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  coef_t wdata, rdata;
  coef_t ref_mem [NUM_FILT];
  int checks = 0, failures = 0;

  coef_cache #(.NUM_FILT(NUM_FILT)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, coef_t got, coef_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got ag=%0d cc=%0d expected ag=%0d cc=%0d",
               what, got.ag, got.cc, exp.ag, exp.cc);
    end
  endtask

  initial begin
    int ad;
    we = 1'b0; re = 1'b0; waddr = '0; raddr = '0; wdata = '0;
    @(negedge clk);
    for (int i = 0; i < NUM_FILT; i++) begin
      we = 1'b1; waddr = AW'(i);
      wdata.ag = COEF_W'($urandom);
      wdata.cc = {$urandom, $urandom};
      ref_mem[i] = wdata;
      @(negedge clk);
    end
    we = 1'b0;
    for (int i = 0; i < 4 * NUM_FILT; i++) begin
      ad = $urandom_range(NUM_FILT - 1);
      re = 1'b1; raddr = AW'(ad);
      @(negedge clk);
      check($sformatf("read %0d", ad), rdata, ref_mem[ad]);
      re = 1'b0; raddr = AW'($urandom_range(NUM_FILT - 1));
      @(negedge clk);
      check($sformatf("hold %0d", ad), rdata, ref_mem[ad]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
