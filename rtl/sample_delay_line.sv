// sample_delay_line: the two tapped delay lines of the input samples that
// feed the pre-adders of the systolic FIR filter.
//
// Element k of the filter adds the newest sample and a sample 1+2k cycles
// older (reduced-latency symmetric systolic form). The upper line is a chain
// of registers: z^-1 in front of element 0 and z^-2 between consecutive
// elements, so its taps are 1, 3, 5, ... cycles old. The lower line carries
// the newest sample to all elements. Where a break register sits on the
// running sum in front of element k, both lines get the same number of extra
// registers there, so the element's two taps arrive b_k cycles later, where
// b_k is the number of break registers in front of element k (break layout
// BREAK_EVERY / BREAK_DEPTH / BREAK_MASK as in fir_pkg). Tap k then
// gives
//   tap_new[k] = x delayed by b_k          (pre-adder input A)
//   tap_old[k] = x delayed by 1 + 2k + b_k (pre-adder input B).
// With no breaks tap_new[k] is x itself (a wire). All registers take a new
// sample every clock and are cleared by the synchronous, active-high reset
// (reset is this design's choice). The structure follows the paper's figures
// for the reduced-delay and the broken systolic filter.
module sample_delay_line
  import fir_pkg::*;
#(
  parameter int unsigned N_TAPS      = N_TAPS_DEFAULT,
  parameter int unsigned W_X         = W_X_DEFAULT,
  parameter int unsigned BREAK_EVERY = BREAK_EVERY_DEFAULT,
  parameter int unsigned BREAK_DEPTH = BREAK_DEPTH_DEFAULT,
  parameter break_mask_t BREAK_MASK  = '0
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [W_X-1:0]              x,
  output logic [N_TAPS/2-1:0][W_X-1:0] tap_new,
  output logic [N_TAPS/2-1:0][W_X-1:0] tap_old
);

  localparam int unsigned K      = N_TAPS / 2;
  localparam int unsigned B_LAST = break_regs_before(K - 1, BREAK_EVERY, BREAK_DEPTH, BREAK_MASK);
  localparam int unsigned UP_LEN = 1 + 2 * (K - 1) + B_LAST;  // oldest upper tap
  localparam int unsigned LO_LEN = B_LAST;                    // oldest lower tap

  // up_q[i] holds x delayed by i cycles (upper line, i = 1 .. UP_LEN).
  logic [UP_LEN:1][W_X-1:0] up_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      up_q <= '0;
    end else begin
      up_q[1] <= x;
      for (int i = 2; i <= UP_LEN; i++) up_q[i] <= up_q[i-1];
    end
  end

  // lo_q[i] holds x delayed by i cycles (lower line, only with breaks).
  if (LO_LEN > 0) begin : g_lower
    logic [LO_LEN:1][W_X-1:0] lo_q;

    always_ff @(posedge clk) begin
      if (rst) begin
        lo_q <= '0;
      end else begin
        lo_q[1] <= x;
        for (int i = 2; i <= LO_LEN; i++) lo_q[i] <= lo_q[i-1];
      end
    end
  end

  for (genvar k = 0; k < K; k++) begin : g_tap
    localparam int unsigned BK = break_regs_before(k, BREAK_EVERY, BREAK_DEPTH, BREAK_MASK);
    if (BK == 0) begin : g_direct
      assign tap_new[k] = x;
    end else begin : g_delayed
      assign tap_new[k] = g_lower.lo_q[BK];
    end
    assign tap_old[k] = up_q[1 + 2 * k + BK];
  end

endmodule
