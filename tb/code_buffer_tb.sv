// code_buffer_tb: self-checking test of the ternary code memory.
// Writes random codes to random addresses (a small depth keeps it quick),
// tracks them in a reference array, then reads every written address and
// checks the code and the one-cycle read latency; rdata must hold while re
// is low, and a same-cycle read and write of one address returns the old
// code.
module code_buffer_tb;
  import rtn_pkg::*;

  localparam int unsigned DEPTH = 300;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 1'b0;
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  tcode_t wdata, rdata;
  tcode_t ref_mem [DEPTH];
  bit written [DEPTH];
  int checks = 0, failures = 0;

  code_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, tcode_t got, tcode_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  initial begin
    int ad;
    we = 1'b0; re = 1'b0; waddr = '0; raddr = '0; wdata = T_ZERO;
    @(negedge clk);
    // fill every address once, then overwrite random ones
    for (int i = 0; i < DEPTH + 500; i++) begin
      ad = (i < DEPTH) ? i : $urandom_range(DEPTH - 1);
      we = 1'b1; waddr = AW'(ad); wdata = tcode_t'($urandom_range(3));
      ref_mem[ad] = wdata; written[ad] = 1'b1;
      @(negedge clk);
    end
    we = 1'b0;
    // read back, checking latency: data appears after the edge
    for (int i = 0; i < DEPTH; i++) begin
      re = 1'b1; raddr = AW'(i);
      @(negedge clk);
      check($sformatf("read %0d", i), rdata, ref_mem[i]);
      re = 1'b0; raddr = AW'($urandom_range(DEPTH - 1));
      @(negedge clk);
      check($sformatf("hold %0d", i), rdata, ref_mem[i]);
    end
    // read-during-write to the same address returns the old code
    for (int i = 0; i < 50; i++) begin
      ad = $urandom_range(DEPTH - 1);
      re = 1'b1; raddr = AW'(ad);
      we = 1'b1; waddr = AW'(ad); wdata = tcode_t'(~ref_mem[ad]);
      @(negedge clk);
      check("read old", rdata, ref_mem[ad]);
      ref_mem[ad] = wdata;
      we = 1'b0;
      @(negedge clk);
      check("read new", rdata, ref_mem[ad]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
