// coef_cache: per-filter store of the two numbers the reparameterization
// needs after the ternary dot product.
//
// With ternary weights scaled by alpha and activations reparameterized as
// gamma*A^t + beta, a neuron's pre-activation is
//   alpha*gamma*(W^t . A^t) + C,  with  C = alpha*beta*sum(W^t).
// C depends only on the trained weights and beta, so it is computed off-line
// and pre-stored, together with the product alpha*gamma. Keeping both in a
// small cache indexed by filter follows the method. The depth (4096 filters,
// the widest quantized layer of the evaluated networks, AlexNet fc6/fc7),
// the fixed-point formats and the port layout are this implementation's
// own.
//
// Interface and timing: one write port (we/waddr/wdata) and one read port
// with one cycle of latency; rdata holds its value until the next read.
// The array is not reset.
module coef_cache
  import rtn_pkg::*;
#(
  parameter int unsigned NUM_FILT = 4096,
  localparam int unsigned AW      = $clog2(NUM_FILT)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  coef_t         wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output coef_t         rdata
);

  coef_t mem [NUM_FILT];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

  a_waddr_range: assert property (@(posedge clk) we |-> (32'(waddr) < NUM_FILT))
    else $error("coef_cache: write address %0d out of range", waddr);
  a_raddr_range: assert property (@(posedge clk) re |-> (32'(raddr) < NUM_FILT))
    else $error("coef_cache: read address %0d out of range", raddr);

endmodule
