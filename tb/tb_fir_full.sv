// tb_fir_full: the filter at its default size: 180 taps on 90 DSP elements,
// 15-bit samples, 18-bit coefficients, 36-bit running sum, a z^-1 break
// behind every element (latency 90 clocks).
//
// The coefficients are a 180-tap Nuttall-window low-pass (cut-off 0.11 of
// the sample rate) rounded to 18-bit signed integers. The test applies an
// impulse of height 1 and checks that the output reproduces the full
// symmetric impulse response h[0..179] starting exactly 90 clocks later,
// then streams 3000 random and full-scale samples and compares every output
// with the direct-form convolution computed here. It also checks the largest
// output magnitude stays within the 36-bit running sum, as the widths were
// chosen for.
module tb_fir_full;
  import tb_fir_util_pkg::*;

  localparam int NT  = 180;
  localparam int K   = NT / 2;
  localparam int LAT = 90;         // 1 output register + 89 break registers
  localparam int HIST = 512;
  localparam real FC = 0.11;

  logic clk = 1'b0;
  logic rst;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic signed [14:0] x;
  logic [K-1:0][17:0] coef;
  logic signed [35:0] y;
  longint h [NT];
  longint hist [HIST];
  longint max_abs = 0;

  fir_systolic u_dut (.clk, .rst, .x, .coef, .y);

  task automatic push(longint s);
    for (int i = HIST - 1; i > 0; i--) hist[i] = hist[i-1];
    hist[0] = s;
    x = 15'(s);
  endtask

  function automatic longint ref_out();
    longint acc = 0;
    for (int t = 0; t < NT; t++) acc += h[t] * hist[t + LAT - 1];
    return acc;
  endfunction

  task automatic check_y();
    longint e = ref_out();
    if ((e < 0 ? -e : e) > max_abs) max_abs = (e < 0 ? -e : e);
    checks++;
    if (longint'(y) != wrap(e, 36)) begin
      failures++;
      if (failures < 20) $display("FAIL y=%0d expected %0d", y, e);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int first_nz = -1;
    int first_h = 0;
    for (int j = 0; j < K; j++) begin
      h[j] = quant(lowpass(j, NT, FC), 18);
      h[NT-1-j] = h[j];
      coef[j] = 18'(h[j]);
    end
    for (int i = 0; i < HIST; i++) hist[i] = 0;
    rst = 1'b1;
    x = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;

    // Impulse response.
    for (int n = 0; n < LAT + NT + 10; n++) begin
      push(n == 0 ? 1 : 0);
      @(posedge clk);
      #1;
      check_y();
      if (first_nz < 0 && y != 0) first_nz = n + 1;
      if (n + 1 >= LAT && n + 1 < LAT + NT) begin
        checks++;
        if (longint'(y) != h[n + 1 - LAT]) begin
          failures++;
          $display("FAIL impulse response tap %0d: %0d expected %0d", n + 1 - LAT, y, h[n + 1 - LAT]);
        end
      end
      @(negedge clk);
    end
    // The window makes the outermost taps zero: the first non-zero output
    // is the first non-zero coefficient, LAT clocks after the impulse.
    for (int t = NT - 1; t >= 0; t--) if (h[t] != 0) first_h = t;
    checks++;
    if (first_nz != LAT + first_h) begin
      failures++;
      $display("FAIL impulse latency %0d expected %0d", first_nz - first_h, LAT);
    end

    // Random and full-scale samples.
    for (int n = 0; n < 3000; n++) begin
      if (n % 400 >= 100 && n % 400 < 300)
        push((n % 800 < 400) ? 16383 : -16384);
      else
        push(longint'($signed(15'($urandom))));
      @(posedge clk);
      #1;
      check_y();
      @(negedge clk);
    end
    checks++;
    if (max_abs >= (64'sd1 <<< 35)) begin
      failures++;
      $display("FAIL output magnitude %0d exceeds the running-sum range", max_abs);
    end
    $display("impulse latency %0d clocks, largest |y| = %0d (2^%0.1f)", first_nz - first_h, max_abs,
             $ln(real'(max_abs)) / $ln(2.0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
