// fir_systolic: symmetric (linear-phase) systolic FIR filter of N_TAPS taps,
// built from N_TAPS/2 identical DSP elements in one pipelined chain.
//
// The impulse response h[0..N-1] is symmetric, h[N-1-j] = h[j], so only
// h[0..N/2-1] are given (port coef, entry j = h[j]) and each element
// multiplies the sum of the two samples that share one coefficient. Element
// k (k = 0 .. N/2-1) holds h[N/2-1-k]: its pre-adder adds the newest sample
// and the sample 1+2k cycles older, its product is added to the running sum
// from element k-1 and registered. The running sum leaves the last element
// as the output. Unrolling the chain gives
//   y[n] = sum_{j=0}^{N/2-1} h[j] * 2^SHIFT[j] * (x[n-L-j] + x[n-L-(N-1)+j])
// with latency L = 1 + (break registers on the running sum), see
// fir_pkg::latency. Every clock takes one sample and delivers one output.
//
// Break registers (BREAK_EVERY, BREAK_DEPTH, BREAK_MASK, see fir_pkg) are
// inserted on the running sum in front of selected elements; both sample taps of every later
// element are delayed by the same amount in sample_delay_line, so the filter
// function is unchanged and only L grows. BREAK_EVERY = 0 is the plain
// systolic chain, BREAK_EVERY = chain length a partial break at the DSP
// column boundaries (or BREAK_MASK for columns of unequal length),
// BREAK_EVERY = 1 the full break.
//
// SHIFT[j] is the normalising left shift d_j applied to both samples of the
// element holding h[j]. With coefficients quantised after removing their
// redundant sign bits ("bit compression"), d_j = Qmax - Q_j puts all products
// on a common scale, so the output is y scaled by 2^Qmax compared with plain
// b-bit coefficients. All shifts 0 (the default) is the plain filter. The
// shifts are parameters because the paper's structure has them as fixed
// wiring; the coefficients are a port so one netlist serves any filter (hold
// them constant while filtering; a change takes effect for newly arriving
// products at once).
//
// Interface: x is a signed W_X-bit sample per clock; y is the signed W_F-bit
// output, wrapping modulo 2^W_F if the coefficients allow a larger sum. The
// synchronous, active-high reset clears all registers; the output is the
// filtered stream after N-1+L clocks. The structure, the delay-line layout,
// the break rule and the widths follow the paper; reset, the packed ports and
// the way break positions are given (period plus mask) are this design's
// choices.
module fir_systolic
  import fir_pkg::*;
#(
  parameter int unsigned N_TAPS      = N_TAPS_DEFAULT,
  parameter int unsigned W_X         = W_X_DEFAULT,
  parameter int unsigned W_C         = W_C_DEFAULT,
  parameter int unsigned W_D         = W_D_DEFAULT,
  parameter int unsigned W_E         = W_E_DEFAULT,
  parameter int unsigned W_F         = W_F_DEFAULT,
  parameter int unsigned BREAK_EVERY = BREAK_EVERY_DEFAULT,
  parameter int unsigned BREAK_DEPTH = BREAK_DEPTH_DEFAULT,
  parameter break_mask_t BREAK_MASK  = '0,
  parameter logic [N_TAPS/2-1:0][SHIFT_W-1:0] SHIFT = '0
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic signed [W_X-1:0]        x,
  input  logic [N_TAPS/2-1:0][W_D-1:0] coef,
  output logic signed [W_F-1:0]        y
);

  localparam int unsigned K = N_TAPS / 2;

  if (N_TAPS < 2 || N_TAPS % 2 != 0) begin : g_bad_taps
    $error("fir_systolic: N_TAPS must be even and at least 2");
  end
  if (K > MAX_ELEMS) begin : g_too_long
    $error("fir_systolic: at most %0d elements are supported", MAX_ELEMS);
  end

  logic [K-1:0][W_X-1:0] tap_new, tap_old;
  logic [K-1:0][W_F-1:0] f, p;

  sample_delay_line #(
    .N_TAPS      (N_TAPS),
    .W_X         (W_X),
    .BREAK_EVERY (BREAK_EVERY),
    .BREAK_DEPTH (BREAK_DEPTH),
    .BREAK_MASK  (BREAK_MASK)
  ) u_taps (
    .clk  (clk),
    .rst  (rst),
    .x    (x),
    .tap_new (tap_new),
    .tap_old (tap_old)
  );

  for (genvar k = 0; k < K; k++) begin : g_elem
    // Running sum into element k: zero for the first element, else the
    // previous element's registered output, through a break if one sits here.
    if (k == 0) begin : g_first
      assign f[k] = '0;
    end else if (has_break(k, BREAK_EVERY, BREAK_MASK)) begin : g_break
      sum_break #(.W(W_F), .DEPTH(BREAK_DEPTH)) u_break (
        .clk (clk),
        .rst (rst),
        .d   (p[k-1]),
        .q   (f[k])
      );
    end else begin : g_cascade
      assign f[k] = p[k-1];
    end

    dsp_block #(
      .W_A   (W_X),
      .W_B   (W_X),
      .W_C   (W_C),
      .W_D   (W_D),
      .W_E   (W_E),
      .W_F   (W_F),
      .SHIFT (int'(SHIFT[K-1-k]))
    ) u_dsp (
      .clk (clk),
      .rst (rst),
      .a   (tap_new[k]),
      .b   (tap_old[k]),
      .d   (coef[K-1-k]),
      .f   (f[k]),
      .p   (p[k])
    );
  end

  assign y = p[K-1];

endmodule
