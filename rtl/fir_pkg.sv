// fir_pkg: shared constants and elaboration-time helpers of the symmetric
// systolic FIR filter.
//
// The filter has N_TAPS (even) taps folded onto N_TAPS/2 systolic elements.
// Element k (k = 0 .. N_TAPS/2-1) multiplies by coefficient h[N_TAPS/2-1-k];
// element 0 starts the running sum and the last element delivers the output.
// "Break" registers may be inserted on the running sum between two elements
// to cut the dedicated DSP cascade route. A break is placed in front of every
// element k >= 1 with k % BREAK_EVERY == 0 (BREAK_EVERY = 0: no periodic
// breaks; BREAK_EVERY = 1: a break after every element, the "full break"
// layout) and, in addition, in front of every element k >= 1 whose bit is set
// in BREAK_MASK (for DSP columns of unequal length). Each break is
// BREAK_DEPTH registers deep (z^-1 or z^-2 in the paper's tables). b_k, the number of break registers in front of element k, sets the
// extra delay both sample taps of element k must receive so that the filter
// function is unchanged; it only grows the latency.
//
// The default widths are the generic design's (W_A, W_B, W_C, W_D, W_E, W_F)
// = (15, 15, 16, 18, 34, 36); the default layout (a z^-1 break behind every
// element) is the variant reported as the smallest in logic with well over
// 200 MHz on both evaluated FPGA families. That choice of default is this
// design's own.
package fir_pkg;

  localparam int unsigned N_TAPS_DEFAULT      = 180;
  localparam int unsigned W_X_DEFAULT         = 15;
  localparam int unsigned W_C_DEFAULT         = 16;
  localparam int unsigned W_D_DEFAULT         = 18;
  localparam int unsigned W_E_DEFAULT         = 34;
  localparam int unsigned W_F_DEFAULT         = 36;
  localparam int unsigned BREAK_EVERY_DEFAULT = 1;
  localparam int unsigned BREAK_DEPTH_DEFAULT = 1;
  // Width of one normalising-shift field in the SHIFT parameter vectors.
  localparam int unsigned SHIFT_W             = 5;

  // Largest number of systolic elements a break mask can describe.
  localparam int unsigned MAX_ELEMS = 1024;

  // Bit k set: a break in front of element k (bit 0 is ignored).
  typedef logic [MAX_ELEMS-1:0] break_mask_t;

  // True when a break sits between element k-1 and element k.
  function automatic bit has_break(int unsigned k, int unsigned every,
                                   break_mask_t mask);
    if (k == 0 || k >= MAX_ELEMS) return 1'b0;
    return ((every != 0) && (k % every == 0)) || mask[k];
  endfunction

  // Number of break registers in front of element k (b_k of the paper).
  function automatic int unsigned break_regs_before(int unsigned k,
                                                    int unsigned every,
                                                    int unsigned depth,
                                                    break_mask_t mask);
    int unsigned n = 0;
    for (int unsigned j = 1; j <= k; j++) if (has_break(j, every, mask)) n += depth;
    return n;
  endfunction

  // Clock cycles from a sample entering to its first contribution (the
  // h[0] term) appearing at the output: the output register of the last
  // element plus all break registers on the running sum.
  function automatic int unsigned latency(int unsigned n_taps,
                                          int unsigned every,
                                          int unsigned depth,
                                          break_mask_t mask);
    return 1 + break_regs_before(n_taps / 2 - 1, every, depth, mask);
  endfunction

  // Largest normalising left shift that cannot overflow a pre-adder of
  // width w_c fed with two w_x-bit samples.
  function automatic int unsigned max_shift(int unsigned w_x, int unsigned w_c);
    return (w_c > w_x) ? w_c - w_x - 1 : 0;
  endfunction

endpackage
