// reparam_mac: the single multiply-accumulate and ReLU that turn a ternary
// dot product into the neuron's output.
//
// The RTN output of one neuron is z = ReLU(alpha*gamma*(W^t . A^t) + C), where
// the ternary dot product comes from the popcount circuit and alpha*gamma and
// C come pre-stored per filter. So one multiply, one add and a clamp at zero
// finish the neuron. This block computes that in full precision (no bits are
// lost before the clamp). The registered output stage and the saturation of
// results above the output range are this implementation's own choices.
// The equivalent form alpha*max(0, gamma*dot + T) with T = beta*sum(W^t)
// is the same number, because C = alpha*T; it is not built separately.
//
// Formats: dot is an integer; coef.ag and coef.cc carry COEF_FRAC fractional
// bits, and so does z. z is unsigned (ReLU output, never negative).
//
// Timing: in_valid at a rising edge gives out_valid and z one cycle later.
// relu_zero flags an output clamped from a negative sum, sat one clamped to
// the largest code.
module reparam_mac
  import rtn_pkg::*;
#(
  parameter int unsigned DW = DOT_W,   // dot-product width
  parameter int unsigned CW = COEF_W,  // alpha*gamma width
  parameter int unsigned AW = ACC_W    // C and z width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] dot,
  input  logic signed [CW-1:0] ag,
  input  logic signed [AW-1:0] cc,
  output logic                 out_valid,
  output logic [AW-1:0]        z,
  output logic                 relu_zero,
  output logic                 sat
);

  localparam int unsigned PW = DW + CW;                      // product width
  localparam int unsigned SW = ((PW > AW) ? PW : AW) + 2;    // sum width

  logic signed [PW-1:0] prod;
  logic signed [SW-1:0] sum;
  logic signed [SW-1:0] zmax;
  logic [AW-1:0]        z_d;
  logic                 relu_d, sat_d;

  always_comb begin
    prod   = dot * ag;
    sum    = SW'(prod) + SW'(cc);
    zmax   = SW'({1'b0, {AW{1'b1}}});
    relu_d = sum < 0;
    sat_d  = sum > zmax;
    if (relu_d)     z_d = '0;
    else if (sat_d) z_d = '1;
    else            z_d = sum[AW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      z         <= '0;
      relu_zero <= 1'b0;
      sat       <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        z         <= z_d;
        relu_zero <= relu_d;
        sat       <= sat_d;
      end
    end
  end

endmodule
