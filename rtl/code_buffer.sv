// code_buffer: memory of 2-bit ternary codes. Two instances form the weights
// buffer and the activations buffer that feed the dot-product circuit.
//
// The buffers in the RTN dot-product circuit hand one code per cycle to the
// gates. Here each buffer is a simple dual-port array: one write port for
// loading, one read port that the controller steps through the vector, one
// address per cycle. Building the buffer as an addressed array rather than a
// shift register is this implementation's own choice; it lets the same
// buffer hold several vectors side by side. The depth defaults to 9216
// codes, the longest quantized dot product of the evaluated networks
// (AlexNet's first fully connected layer, 256*6*6 inputs).
//
// Interface and timing:
//   we/waddr/wdata - write one code at the rising edge.
//   re/raddr       - read; rdata holds the code from the edge at which re was
//                    high (one-cycle latency) until the next read.
// A read and a write to the same address in one cycle return the old code.
// The array is not reset; only codes that were written should be read.
module code_buffer
  import rtn_pkg::*;
#(
  parameter int unsigned DEPTH = 9216,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  tcode_t        wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output tcode_t        rdata
);

  tcode_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

  a_waddr_range: assert property (@(posedge clk) we |-> (32'(waddr) < DEPTH))
    else $error("code_buffer: write address %0d out of range", waddr);
  a_raddr_range: assert property (@(posedge clk) re |-> (32'(raddr) < DEPTH))
    else $error("code_buffer: read address %0d out of range", raddr);

endmodule
