// rtn_ctrl: sequencer for one neuron job of the ternary datapath.
//
// A job names a weight vector (w_base), an activation vector (a_base), their
// common length len and the filter whose coefficients apply (filt). On start
// the controller clears the two popcount counters and reads the filter's
// coefficients from the cache. It then steps both buffers through len
// addresses, one per cycle, so the dot-product circuit takes one element
// pair per cycle. After the last pair is counted it issues one MAC. All of
// this sequencing is this implementation's own; the method only describes
// the datapath it drives.
//
// Timing, for a start sampled at a rising edge of cycle 0:
//   cycles 1 .. len   : buffer reads of elements 0 .. len-1 (RUN)
//   cycles 2 .. len+1 : element pairs counted (the last one in FLUSH)
//   cycle  len+2      : mac_go, dot result and coefficients stable (MAC)
//   cycle  len+3      : done from the MAC output register, outside this block
// so a job of len elements takes len+3 cycles, len = 0 included.
// start is accepted only while busy is low; a start while busy is an error.
module rtn_ctrl #(
  parameter int unsigned DEPTH    = 9216,
  parameter int unsigned NUM_FILT = 4096,
  localparam int unsigned AW      = $clog2(DEPTH),
  localparam int unsigned LW      = $clog2(DEPTH + 1),
  localparam int unsigned FW      = $clog2(NUM_FILT)
) (
  input  logic          clk,
  input  logic          rst_n,
  // job
  input  logic          start,
  input  logic [AW-1:0] w_base,
  input  logic [AW-1:0] a_base,
  input  logic [LW-1:0] len,
  input  logic [FW-1:0] filt,
  output logic          busy,
  // buffers
  output logic          buf_re,
  output logic [AW-1:0] w_raddr,
  output logic [AW-1:0] a_raddr,
  // coefficient cache
  output logic          cf_re,
  output logic [FW-1:0] cf_raddr,
  // dot-product circuit
  output logic          dot_clear,
  output logic          dot_en,
  // MAC
  output logic          mac_go
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FLUSH, S_MAC} state_t;

  state_t        state;
  logic [AW-1:0] w_ptr, a_ptr;
  logic [LW-1:0] remain;   // reads still to issue, including this cycle's
  logic          rd_q;     // a buffer read was issued last cycle

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      w_ptr  <= '0;
      a_ptr  <= '0;
      remain <= '0;
      rd_q   <= 1'b0;
    end else begin
      rd_q <= buf_re;
      unique case (state)
        S_IDLE: if (start) begin
          w_ptr  <= w_base;
          a_ptr  <= a_base;
          remain <= len;
          state  <= (len == '0) ? S_FLUSH : S_RUN;
        end
        S_RUN: begin
          w_ptr  <= w_ptr + 1'b1;
          a_ptr  <= a_ptr + 1'b1;
          remain <= remain - 1'b1;
          if (remain == LW'(1)) state <= S_FLUSH;
        end
        S_FLUSH: state <= S_MAC;
        S_MAC:   state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state != S_IDLE);
    buf_re    = (state == S_RUN);
    w_raddr   = w_ptr;
    a_raddr   = a_ptr;
    cf_re     = (state == S_IDLE) && start;
    cf_raddr  = filt;
    dot_clear = (state == S_IDLE) && start;
    dot_en    = rd_q;
    mac_go    = (state == S_MAC);
  end

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) !(start && busy))
    else $error("rtn_ctrl: start while busy");
  a_len_range: assert property (@(posedge clk) disable iff (!rst_n)
                                (start && !busy) |-> (32'(len) <= DEPTH))
    else $error("rtn_ctrl: job length %0d exceeds buffer depth", len);

endmodule
