// rtn_top: one reparameterized ternary neuron engine.
//
// The engine computes z = ReLU(alpha*gamma*(W^t . A^t) + C) for one output
// unit at a time, the way the RTN method arranges inference. Ternary
// weights and activations are held as 2-bit codes (first bit: non-zero,
// second bit: sign). A popcount circuit forms their dot product with only
// AND/XOR gates and two counters. A single multiply-accumulate then applies
// the per-filter scale alpha*gamma and the pre-stored constant C, followed
// by ReLU.
//
// Blocks:
//   ternary_encoder - ternarizes incoming fixed-point activations against two
//                     batch-norm-folded thresholds on their way into the
//                     activations buffer; a second instance does the same for
//                     weights loaded in full precision
//   code_buffer x2  - weights buffer and activations buffer
//   coef_cache      - alpha*gamma and C for each filter
//   rtn_ctrl        - runs one job: buffer reads, counter control, MAC issue
//   ternary_dot     - the popcount dot-product circuit
//   reparam_mac     - the final MAC and ReLU
//
// Loading: weights are normally loaded already ternarized (they are fixed
// after training), as 2-bit codes on w_wcode. With w_fp_sel high the weight
// written is instead w_wdata, a fixed-point value ternarized against
// w_thr_hi/w_thr_lo, the thresholds (0.5-b_W)/k_W and -(0.5+b_W)/k_W of the
// weight transform. Activations arrive as ACT_W-bit fixed-point
// numbers and are encoded with the thresholds present on thr_hi/thr_lo in
// the same cycle. Coefficients are written per filter. Loading may go on
// while a job runs, as long as it does not touch the job's addresses.
//
// Job timing: start (while busy is low) in cycle 0 gives done, with z valid,
// in cycle len+3: one element pair per cycle plus three cycles of overhead.
// dot reports the raw ternary dot product of the last job. z_sat can never
// fire at the default widths (|alpha*gamma*dot| < 2**29 and C < 2**47 stay
// inside the 48-bit output); it matters only if the widths are narrowed.
// The two counter outputs of ternary_dot are not used here: dot carries
// their difference.
// Everything beyond the datapath (the load ports, the job interface, the
// buffer and cache sizes, the number formats) is this implementation's own.
module rtn_top
  import rtn_pkg::*;
#(
  parameter int unsigned DEPTH    = 9216,  // codes per buffer
  parameter int unsigned NUM_FILT = 4096,  // filters in the coefficient cache
  localparam int unsigned AW      = $clog2(DEPTH),
  localparam int unsigned LW      = $clog2(DEPTH + 1),
  localparam int unsigned FW      = $clog2(NUM_FILT)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight load (2-bit ternary codes)
  input  logic                    w_we,
  input  logic [AW-1:0]           w_waddr,
  input  tcode_t                  w_wcode,
  input  logic                    w_fp_sel,   // 1: ternarize w_wdata instead
  input  logic signed [ACT_W-1:0] w_wdata,
  input  logic signed [ACT_W-1:0] w_thr_hi,
  input  logic signed [ACT_W-1:0] w_thr_lo,
  // activation load (fixed point, ternarized on the way in)
  input  logic                    a_we,
  input  logic [AW-1:0]           a_waddr,
  input  logic signed [ACT_W-1:0] a_wdata,
  input  logic signed [ACT_W-1:0] thr_hi,
  input  logic signed [ACT_W-1:0] thr_lo,
  // coefficient load
  input  logic                    cf_we,
  input  logic [FW-1:0]           cf_waddr,
  input  coef_t                   cf_wdata,
  // job
  input  logic                    start,
  input  logic [AW-1:0]           w_base,
  input  logic [AW-1:0]           a_base,
  input  logic [LW-1:0]           len,
  input  logic [FW-1:0]           filt,
  output logic                    busy,
  output logic                    done,
  output logic [ACC_W-1:0]        z,
  output logic                    z_relu_zero,
  output logic                    z_sat,
  output logic signed [DOT_W-1:0] dot
);

  tcode_t        a_code, w_enc_code, w_code;
  logic          buf_re;
  logic [AW-1:0] w_raddr, a_raddr;
  tcode_t        w_rd, a_rd;
  logic          cf_re;
  logic [FW-1:0] cf_raddr;
  coef_t         coef;
  logic          dot_clear, dot_en, mac_go;
  logic [CNT_W-1:0] cnt_nz, cnt_neg;

  ternary_encoder #(.W(ACT_W)) u_enc (
    .act    (a_wdata),
    .thr_hi (thr_hi),
    .thr_lo (thr_lo),
    .code   (a_code)
  );

  ternary_encoder #(.W(ACT_W)) u_wenc (
    .act    (w_wdata),
    .thr_hi (w_thr_hi),
    .thr_lo (w_thr_lo),
    .code   (w_enc_code)
  );

  always_comb w_code = w_fp_sel ? w_enc_code : w_wcode;

  code_buffer #(.DEPTH(DEPTH)) u_wbuf (
    .clk   (clk),
    .we    (w_we),
    .waddr (w_waddr),
    .wdata (w_code),
    .re    (buf_re),
    .raddr (w_raddr),
    .rdata (w_rd)
  );

  code_buffer #(.DEPTH(DEPTH)) u_abuf (
    .clk   (clk),
    .we    (a_we),
    .waddr (a_waddr),
    .wdata (a_code),
    .re    (buf_re),
    .raddr (a_raddr),
    .rdata (a_rd)
  );

  coef_cache #(.NUM_FILT(NUM_FILT)) u_cache (
    .clk   (clk),
    .we    (cf_we),
    .waddr (cf_waddr),
    .wdata (cf_wdata),
    .re    (cf_re),
    .raddr (cf_raddr),
    .rdata (coef)
  );

  rtn_ctrl #(.DEPTH(DEPTH), .NUM_FILT(NUM_FILT)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .w_base    (w_base),
    .a_base    (a_base),
    .len       (len),
    .filt      (filt),
    .busy      (busy),
    .buf_re    (buf_re),
    .w_raddr   (w_raddr),
    .a_raddr   (a_raddr),
    .cf_re     (cf_re),
    .cf_raddr  (cf_raddr),
    .dot_clear (dot_clear),
    .dot_en    (dot_en),
    .mac_go    (mac_go)
  );

  ternary_dot #(.W(CNT_W)) u_dot (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (dot_clear),
    .en      (dot_en),
    .w       (w_rd),
    .a       (a_rd),
    .cnt_nz  (cnt_nz),
    .cnt_neg (cnt_neg),
    .result  (dot)
  );

  reparam_mac #(.DW(DOT_W), .CW(COEF_W), .AW(ACC_W)) u_mac (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (mac_go),
    .dot       (dot),
    .ag        (coef.ag),
    .cc        (coef.cc),
    .out_valid (done),
    .z         (z),
    .relu_zero (z_relu_zero),
    .sat       (z_sat)
  );

endmodule
