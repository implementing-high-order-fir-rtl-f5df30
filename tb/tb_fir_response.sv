// tb_fir_response: frequency response of the 180-tap low-pass with plain
// 18-bit coefficients against the same filter with bit-compressed 18-bit
// coefficients and normalising sample shifts.
//
// Both filters use 16-bit samples, a 25-bit pre-adder, 18-bit coefficients,
// a 43-bit product and a 48-bit running sum, with the default z^-1 break
// behind every element. The plain filter holds round(h 2^17). The enhanced
// filter holds round(h 2^(17+Q)) with Q = floor(-log2|h|) limited to
// Qmax = 8 (the largest shift a 25-bit pre-adder takes for 16-bit samples
// without overflow), and shifts both samples of that coefficient left by
// d = Qmax - Q, so every product lands on the common scale 2^(17+Qmax). The
// shifts are computed at elaboration from the same filter design.
//
// An impulse is applied to both; every output must equal the expected
// integer tap (coefficient, or coefficient times 2^d). The two measured
// impulse responses and the unquantised design are then transformed (DFT
// at 2000 frequencies) and compared: the passband (up to 0.09 fs) must stay
// within 0.01 dB, and the enhanced filter's worst stopband level (from
// 0.14 fs) must be at least 10 dB below that of the plain filter.
module tb_fir_response;
  import tb_fir_util_pkg::*;

  localparam int  NT   = 180;
  localparam int  K    = NT / 2;
  localparam int  LAT  = 90;
  localparam int  QMAX = 8;
  localparam real FC   = 0.11;
  localparam int  NF   = 2000;

  function automatic logic [K-1:0][4:0] shifts();
    logic [K-1:0][4:0] r;
    for (int j = 0; j < K; j++) r[j] = 5'(QMAX - compress_q(lowpass(j, NT, FC), QMAX));
    return r;
  endfunction

  localparam logic [K-1:0][4:0] SHIFTS = shifts();

  logic clk = 1'b0;
  logic rst;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic signed [15:0] x;
  logic [K-1:0][17:0] coef_plain, coef_comp;
  logic signed [47:0] y_plain, y_comp;

  fir_systolic #(.W_X(16), .W_C(25), .W_D(18), .W_E(43), .W_F(48))
    u_plain (.clk, .rst, .x, .coef(coef_plain), .y(y_plain));
  fir_systolic #(.W_X(16), .W_C(25), .W_D(18), .W_E(43), .W_F(48), .SHIFT(SHIFTS))
    u_comp (.clk, .rst, .x, .coef(coef_comp), .y(y_comp));

  real h_float [NT], h_plain [NT], h_comp [NT];
  longint e_plain [NT], e_comp [NT];

  // Magnitude in dB at frequency f (fraction of fs) of response v:
  // 0 unquantised design, 1 plain filter, 2 enhanced filter.
  function automatic real mag_db(int v, real f);
    real re = 0.0, im = 0.0, m, ht;
    for (int t = 0; t < NT; t++) begin
      ht = (v == 0) ? h_float[t] : (v == 1) ? h_plain[t] : h_comp[t];
      re += ht * $cos(2.0 * PI * f * real'(t));
      im -= ht * $sin(2.0 * PI * f * real'(t));
    end
    m = $sqrt(re * re + im * im);
    return 20.0 * $log10(m < 1e-30 ? 1e-30 : m);
  endfunction

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real pb [3], sb [3], db;
    int nshift = 0;
    for (int j = 0; j < K; j++) begin
      real hj;
      hj = lowpass(j, NT, FC);
      coef_plain[j] = 18'(quant(hj, 18));
      coef_comp[j]  = 18'(quant_compressed(hj, 18, QMAX));
      e_plain[j] = quant(hj, 18);
      e_comp[j]  = quant_compressed(hj, 18, QMAX) * (64'sd1 <<< SHIFTS[j]);
      e_plain[NT-1-j] = e_plain[j];
      e_comp[NT-1-j]  = e_comp[j];
      h_float[j] = hj;
      h_float[NT-1-j] = hj;
      if (SHIFTS[j] != 0) nshift++;
    end
    rst = 1'b1;
    x = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;

    for (int n = 0; n < LAT + NT + 5; n++) begin
      x = (n == 0) ? 16'sd1 : 16'sd0;
      @(posedge clk);
      #1;
      if (n + 1 >= LAT && n + 1 < LAT + NT) begin
        int t;
        t = n + 1 - LAT;
        check("plain tap", longint'(y_plain), e_plain[t]);
        check("compressed tap", longint'(y_comp), e_comp[t]);
        h_plain[t] = real'(y_plain) / (2.0 ** 17);
        h_comp[t]  = real'(y_comp) / (2.0 ** (17 + QMAX));
      end else begin
        check("plain idle", longint'(y_plain), 0);
        check("compressed idle", longint'(y_comp), 0);
      end
      @(negedge clk);
    end

    for (int i = 0; i < 3; i++) begin pb[i] = 0.0; sb[i] = -400.0; end
    for (int i = 0; i <= NF; i++) begin
      real f;
      f = 0.5 * real'(i) / real'(NF);
      if (f <= 0.09 || f >= 0.14) begin
        for (int v = 0; v < 3; v++) begin
          db = mag_db(v, f);
          if (f <= 0.09) begin
            if ((db < 0 ? -db : db) > pb[v]) pb[v] = (db < 0 ? -db : db);
          end else if (db > sb[v]) sb[v] = db;
        end
      end
    end
    $display("coefficients with a non-zero shift: %0d of %0d", nshift, K);
    $display("passband deviation / dB:  float %0.4f  plain %0.4f  compressed %0.4f", pb[0], pb[1], pb[2]);
    $display("worst stopband / dB:      float %0.1f  plain %0.1f  compressed %0.1f", sb[0], sb[1], sb[2]);
    for (int v = 0; v < 3; v++) begin
      checks++;
      if (pb[v] > 0.01) begin failures++; $display("FAIL passband %0d", v); end
    end
    checks++;
    if (!(sb[2] < sb[1] - 10.0)) begin failures++; $display("FAIL no stopband improvement"); end
    checks++;
    if (nshift == 0) begin failures++; $display("FAIL no shift used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
