// reparam_mac_tb: self-checking test of the final MAC and ReLU.
// Drives random dot products, scales and constants (small, mid and extreme
// ranges so that the ReLU clamp, the saturation and the pass-through case
// all occur), and compares z with ReLU(dot*ag + cc) worked out in 64-bit
// integers. Checks the one-cycle latency of out_valid and counts how often
// each case happened.
module reparam_mac_tb;
  import rtn_pkg::*;

  // A 40-bit output instead of the default 48 bits: at the default widths
  // the sum can never pass the output range, so saturation could not occur.
  localparam int unsigned AWT = 40;

  logic clk = 1'b0;
  logic rst_n;
  logic in_valid;
  logic signed [DOT_W-1:0] dot;
  logic signed [COEF_W-1:0] ag;
  logic signed [AWT-1:0] cc;
  logic out_valid;
  logic [AWT-1:0] z;
  logic relu_zero, sat;
  int checks = 0, failures = 0;
  int n_relu = 0, n_sat = 0, n_pass = 0;

  reparam_mac #(.AW(AWT)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (dot=%0d ag=%0d cc=%0d)", what, got, exp, dot, ag, cc);
    end
  endtask

  initial begin
    longint s, ez, zmax;
    bit er, es;
    zmax = (64'sd1 <<< AWT) - 1;
    rst_n = 1'b1;
    #1 rst_n = 1'b0; in_valid = 1'b0; dot = '0; ag = '0; cc = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check("valid after reset", longint'(out_valid), 0);
    for (int t = 0; t < 3000; t++) begin
      case (t % 3)
        0: begin  // network-sized values
          dot = DOT_W'($signed($urandom_range(0, 9216 * 2)) - 9216);
          ag  = COEF_W'($urandom_range(0, 2048));
          cc  = AWT'($signed($urandom_range(0, 1 << 24)) - (1 << 23));
        end
        1: begin  // full ranges
          dot = {$urandom, $urandom} ;
          ag  = COEF_W'($urandom);
          cc  = AWT'({$urandom, $urandom});
        end
        default: begin  // near the top of the output range
          dot = DOT_W'(32'h7fff_0000 + $urandom_range(0, 65535));
          ag  = COEF_W'(16'h7fff - $urandom_range(0, 3));
          cc  = AWT'($urandom);
        end
      endcase
      in_valid = 1'b1;
      s  = longint'(dot) * longint'(ag) + longint'(cc);
      er = s < 0;
      es = s > zmax;
      ez = er ? 0 : es ? zmax : s;
      @(negedge clk);
      in_valid = 1'b0;
      check("out_valid", longint'(out_valid), 1);
      check("z", longint'(z), ez);
      check("relu_zero", longint'(relu_zero), longint'(er));
      check("sat", longint'(sat), longint'(es));
      if (er) n_relu++; else if (es) n_sat++; else n_pass++;
      if (t % 7 == 0) begin
        @(negedge clk);
        check("valid drops", longint'(out_valid), 0);
        check("z held", longint'(z), ez);
      end
    end
    checks++;
    if (n_relu == 0 || n_sat == 0 || n_pass == 0) begin
      failures++;
      $display("FAIL coverage relu=%0d sat=%0d pass=%0d", n_relu, n_sat, n_pass);
    end
    $display("cases: relu=%0d sat=%0d pass=%0d", n_relu, n_sat, n_pass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
