// dsp_block: one systolic element of the symmetric FIR filter, the generic
// pre-adder / multiplier / post-adder operation that FPGA DSP slices provide.
//
//   A' = A * 2^SHIFT, B' = B * 2^SHIFT   (normalising left shifts)
//   C  = A' + B'                          (pre-adder, W_C bits)
//   E  = C * D                            (multiplier, W_E bits)
//   P <= E + F                            (post-adder, W_F bits, registered)
//
// A and B are the two samples that share one coefficient of the symmetric
// impulse response, D is that coefficient and F the running sum arriving from
// the previous element. The register on P is the pipeline stage z^-1 of the
// systolic running sum, so the element has one cycle of latency from F to P
// and from A/B/D to P. The left shifts follow the paper's enhanced structure:
// a coefficient whose redundant sign bits were removed ("bit compression") is
// brought back to the common scale by shifting the samples, not the sum, so
// the running sum keeps the plain DSP cascade. SHIFT = 0 gives the plain
// element. With constant SHIFT the shifts are wiring.
//
// Arithmetic is two's complement. The adders and the multiplier keep the low
// W_C, W_E and W_F bits of their results; with the paper's widths none of
// them can overflow except the running sum, whose width the filter designer
// sizes for the coefficients. The limit SHIFT <= W_C - max(W_A,W_B) - 1 is
// this design's bound that keeps the pre-adder exact; it is one bit tighter
// than the paper's example (9 bits for 16-bit samples and a 25-bit
// pre-adder), which lets the shifted sum of two full-scale samples overflow.
// The synchronous, active-high reset clears P and is this design's choice.
module dsp_block #(
  parameter int unsigned W_A   = 15,
  parameter int unsigned W_B   = 15,
  parameter int unsigned W_C   = 16,
  parameter int unsigned W_D   = 18,
  parameter int unsigned W_E   = 34,
  parameter int unsigned W_F   = 36,
  parameter int unsigned SHIFT = 0
) (
  input  logic                clk,
  input  logic                rst,
  input  logic signed [W_A-1:0] a,
  input  logic signed [W_B-1:0] b,
  input  logic signed [W_D-1:0] d,
  input  logic signed [W_F-1:0] f,
  output logic signed [W_F-1:0] p
);

  localparam int unsigned W_AB = (W_A > W_B) ? W_A : W_B;

  if (SHIFT + W_AB + 1 > W_C) begin : g_shift_too_wide
    $error("dsp_block: SHIFT=%0d overflows the %0d-bit pre-adder", SHIFT, W_C);
  end
  if (W_E > W_C + W_D || W_F < W_E) begin : g_bad_widths
    $error("dsp_block: need W_E <= W_C + W_D and W_F >= W_E");
  end

  logic signed [W_C-1:0] a_sh, b_sh, c;
  logic signed [W_E-1:0] e;
  logic signed [W_F-1:0] y;

  always_comb begin
    a_sh = W_C'(a) <<< SHIFT;
    b_sh = W_C'(b) <<< SHIFT;
    c    = a_sh + b_sh;
    e    = W_E'(c * d);
    y    = W_F'(e) + f;
  end

  always_ff @(posedge clk) begin
    if (rst) p <= '0;
    else     p <= y;
  end

endmodule
