// tb_dsp_block: self-checking test of one systolic DSP element.
//
// Two elements are exercised side by side: one with the generic design's
// widths (15,15,16,18,34,36) and no shift, one with 16-bit samples, a 25-bit
// pre-adder, 18-bit coefficients, a 48-bit running sum and a normalising
// shift of 8. Every cycle random samples, coefficients and running sums are
// applied; one clock later P must equal ((A+B)*2^SHIFT)*D + F reduced to the
// running-sum width, computed here with 64-bit integers. The one-cycle
// latency and the synchronous reset are checked too.
module tb_dsp_block;
  localparam int SH = 8;

  logic clk = 1'b0;
  logic rst;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // Plain element, paper widths.
  logic signed [14:0] a0, b0;
  logic signed [17:0] d0;
  logic signed [35:0] f0, p0;
  // Shifted element, wider pre-adder.
  logic signed [15:0] a1, b1;
  logic signed [17:0] d1;
  logic signed [47:0] f1, p1;

  dsp_block u_plain (.clk, .rst, .a(a0), .b(b0), .d(d0), .f(f0), .p(p0));
  dsp_block #(.W_A(16), .W_B(16), .W_C(25), .W_D(18), .W_E(43), .W_F(48), .SHIFT(SH))
    u_shift (.clk, .rst, .a(a1), .b(b1), .d(d1), .f(f1), .p(p1));

  function automatic longint wrap(longint v, int w);
    longint m = v & ((64'sd1 <<< w) - 1);
    if (m[w-1]) m = m - (64'sd1 <<< w);
    return m;
  endfunction

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  longint exp0, exp1;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1;
    a0 = 15'sd1000; b0 = 15'sd1000; d0 = 18'sd1000; f0 = 36'sd5;
    a1 = 16'sd1000; b1 = 16'sd1000; d1 = 18'sd1000; f1 = 48'sd5;
    repeat (2) @(posedge clk);
    #1;
    check("reset plain", p0, 0);
    check("reset shift", p1, 0);
    @(negedge clk) rst = 1'b0;

    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // Every 16th vector uses full-scale extremes.
      if (n % 16 == 0) begin
        a0 = (n % 32 == 0) ? -15'sd16384 : 15'sd16383;  b0 = a0;
        d0 = (n % 64 == 0) ? -18'sd131072 : 18'sd131071;
        a1 = (n % 32 == 0) ? -16'sd32768 : 16'sd32767;  b1 = a1;
        d1 = d0;
      end else begin
        a0 = 15'($urandom); b0 = 15'($urandom); d0 = 18'($urandom);
        a1 = 16'($urandom); b1 = 16'($urandom); d1 = 18'($urandom);
      end
      f0 = {4'($urandom), 32'($urandom)};
      f1 = {16'($urandom), 32'($urandom)};
      exp0 = wrap((longint'(a0) + longint'(b0)) * longint'(d0) + longint'(f0), 36);
      exp1 = wrap(((longint'(a1) + longint'(b1)) * (64'sd1 <<< SH)) * longint'(d1)
                  + longint'(f1), 48);
      @(posedge clk);
      #1;
      check("plain", p0, exp0);
      check("shift", p1, exp1);
    end

    // Reset in the middle of operation clears the output register.
    @(negedge clk) rst = 1'b1;
    @(posedge clk) #1;
    check("reset again plain", p0, 0);
    check("reset again shift", p1, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
