// tb_fir_util_pkg: filter design and quantisation helpers for the filter
// testbenches (simulation only; all functions may be used at elaboration).
//
// lowpass() designs a linear-phase low-pass of n_taps taps by the window
// method: an ideal low-pass (cut-off fc, as a fraction of the sample rate)
// times the 4-term Nuttall window
//   w[n] = 0.355768 - 0.487396 cos(2 pi n/(N-1)) + 0.144232 cos(4 pi n/(N-1))
//          - 0.012604 cos(6 pi n/(N-1)),
// normalised to unit gain at DC. quant() rounds a real coefficient to a
// signed b-bit integer, I = round(h 2^(b-1)), saturated to the b-bit range.
// compress_q() is the bit-compression exponent Q = floor(log2(2^(b-1)/|h|)
// - (b-1)) = floor(-log2 |h|), the number of redundant sign bits of h in a
// b-bit word, limited to q_max; quant_compressed() quantises h 2^Q to b bits.
package tb_fir_util_pkg;

  localparam real PI = 3.14159265358979323846;

  function automatic real lowpass_raw(int n, int n_taps, real fc);
    real t, s, w;
    t = real'(n) - real'(n_taps - 1) / 2.0;
    s = (t == 0.0) ? 2.0 * fc : $sin(2.0 * PI * fc * t) / (PI * t);
    w = 0.355768 - 0.487396 * $cos(2.0 * PI * n / (n_taps - 1))
                 + 0.144232 * $cos(4.0 * PI * n / (n_taps - 1))
                 - 0.012604 * $cos(6.0 * PI * n / (n_taps - 1));
    return s * w;
  endfunction

  function automatic real lowpass(int n, int n_taps, real fc);
    real sum = 0.0;
    for (int i = 0; i < n_taps; i++) sum += lowpass_raw(i, n_taps, fc);
    return lowpass_raw(n, n_taps, fc) / sum;
  endfunction

  function automatic longint quant(real h, int b);
    real v = $floor(h * (2.0 ** (b - 1)) + 0.5);
    if (v >  2.0 ** (b - 1) - 1.0) v = 2.0 ** (b - 1) - 1.0;
    if (v < -(2.0 ** (b - 1)))     v = -(2.0 ** (b - 1));
    return longint'(v);
  endfunction

  function automatic int compress_q(real h, int q_max);
    real a = (h < 0.0) ? -h : h;
    int q;
    if (a == 0.0) return q_max;
    q = int'($floor(-$ln(a) / $ln(2.0)));
    if (q < 0) q = 0;
    if (q > q_max) q = q_max;
    return q;
  endfunction

  function automatic longint quant_compressed(real h, int b, int q_max);
    return quant(h * (2.0 ** compress_q(h, q_max)), b);
  endfunction

  // Wrap a value to a signed w-bit two's complement number.
  function automatic longint wrap(longint v, int w);
    longint m = v & ((64'sd1 <<< w) - 1);
    if (m[w-1]) m = m - (64'sd1 <<< w);
    return m;
  endfunction

endpackage
