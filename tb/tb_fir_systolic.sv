// tb_fir_systolic: end-to-end test of the systolic FIR filter at reduced
// size (20 taps, 10 DSP elements) in every running-sum layout.
//
// Six filters run side by side:
//   c0  plain systolic chain, no breaks              (latency 1)
//   c1  partial break: z^-1 in front of elements 4, 8 (latency 3)
//   c2  full break z^-1 (the default layout)          (latency 10)
//   c3  full break z^-2                               (latency 19)
//   c4  16-bit samples, 25-bit pre-adder, 48-bit sum, normalising shifts
//       0..8 per coefficient, z^-2 break every 3rd element (latency 7)
//   c5  z^-1 breaks at irregular positions, in front of elements 2, 3
//       and 7, given as a mask                        (latency 4)
// The latencies above are worked out by hand from the break layout. Each
// filter first gets an impulse (its first non-zero output must appear
// exactly its latency after the impulse), then random full-scale samples
// with random 18-bit coefficients; every output is compared with the direct
// form y[n] = sum_j h[j] 2^d[j] (x[n-L+1-j] + x[n-L+1-(N-1)+j]) computed here
// from a sample history and reduced to the output width. A reset in the
// middle of the stream must clear the output. Mechanisms counted: the
// latency of each break layout seen on an impulse, and outputs of c4 that
// differ from what the same coefficients give without shifts.
module tb_fir_systolic;
  import tb_fir_util_pkg::*;

  localparam int NT = 20;
  localparam int K  = NT / 2;
  localparam int NCFG = 6;
  localparam int HIST = 64;
  // Per-configuration latency, worked out from the break layout.
  localparam int LAT [NCFG] = '{1, 3, 10, 19, 7, 4};
  localparam int WF  [NCFG] = '{36, 36, 36, 36, 48, 36};
  // Normalising shifts of c4, entry j for coefficient h[j].
  localparam int SH4 [K] = '{0, 8, 3, 5, 1, 7, 2, 6, 4, 8};

  function automatic logic [K-1:0][4:0] pack_shifts();
    logic [K-1:0][4:0] r;
    for (int j = 0; j < K; j++) r[j] = 5'(SH4[j]);
    return r;
  endfunction

  logic clk = 1'b0;
  logic rst;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int latency_seen [NCFG];
  int shift_effect = 0;

  logic signed [14:0] x15;
  logic signed [15:0] x16;
  logic [K-1:0][17:0] coef_a, coef_b;
  logic signed [35:0] y0, y1, y2, y3, y5;
  logic signed [47:0] y4;

  fir_systolic #(.N_TAPS(NT), .BREAK_EVERY(0))
    u_c0 (.clk, .rst, .x(x15), .coef(coef_a), .y(y0));
  fir_systolic #(.N_TAPS(NT), .BREAK_EVERY(4), .BREAK_DEPTH(1))
    u_c1 (.clk, .rst, .x(x15), .coef(coef_a), .y(y1));
  fir_systolic #(.N_TAPS(NT), .BREAK_EVERY(1), .BREAK_DEPTH(1))
    u_c2 (.clk, .rst, .x(x15), .coef(coef_a), .y(y2));
  fir_systolic #(.N_TAPS(NT), .BREAK_EVERY(1), .BREAK_DEPTH(2))
    u_c3 (.clk, .rst, .x(x15), .coef(coef_a), .y(y3));
  fir_systolic #(.N_TAPS(NT), .W_X(16), .W_C(25), .W_D(18), .W_E(43), .W_F(48),
                 .BREAK_EVERY(3), .BREAK_DEPTH(2), .SHIFT(pack_shifts()))
    u_c4 (.clk, .rst, .x(x16), .coef(coef_b), .y(y4));
  fir_systolic #(.N_TAPS(NT), .BREAK_EVERY(0), .BREAK_DEPTH(1),
                 .BREAK_MASK(fir_pkg::break_mask_t'('b1000_1100)))
    u_c5 (.clk, .rst, .x(x15), .coef(coef_a), .y(y5));

  longint h15 [HIST], h16 [HIST];  // sample histories, index 0 = newest

  function automatic longint ref_out(input longint hist [HIST], logic [K-1:0][17:0] c,
                                     int lat, int wf, bit shifted);
    longint acc = 0;
    for (int j = 0; j < K; j++) begin
      longint cj = longint'($signed(c[j]));
      if (shifted) cj = cj * (64'sd1 <<< SH4[j]);
      acc += cj * (hist[j + lat - 1] + hist[NT - 1 - j + lat - 1]);
    end
    return wrap(acc, wf);
  endfunction

  function automatic longint y_of(int i);
    case (i)
      0: return longint'(y0);
      1: return longint'(y1);
      2: return longint'(y2);
      3: return longint'(y3);
      4: return longint'(y4);
      default: return longint'(y5);
    endcase
  endfunction

  task automatic push(longint s15, longint s16);
    for (int i = HIST - 1; i > 0; i--) begin
      h15[i] = h15[i-1];
      h16[i] = h16[i-1];
    end
    h15[0] = s15;
    h16[0] = s16;
    x15 = 15'(s15);
    x16 = 16'(s16);
  endtask

  task automatic check_outputs();
    longint e;
    for (int i = 0; i < NCFG; i++) begin
      if (i != 4) e = ref_out(h15, coef_a, LAT[i], WF[i], 1'b0);
      else        e = ref_out(h16, coef_b, LAT[i], WF[i], 1'b1);
      checks++;
      if (y_of(i) != e) begin
        failures++;
        if (failures < 20) $display("FAIL c%0d: y=%0d expected %0d", i, y_of(i), e);
      end
    end
    if (y4 != 48'(ref_out(h16, coef_b, LAT[4], WF[4], 1'b0))) shift_effect++;
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int first_nz [NCFG];
    for (int i = 0; i < HIST; i++) begin h15[i] = 0; h16[i] = 0; end
    for (int j = 0; j < K; j++) begin
      coef_a[j] = 18'($urandom);
      coef_b[j] = 18'($urandom);
    end
    coef_a[0] = 18'sd1234;  // h[0] non-zero: the impulse shows at the latency
    coef_b[0] = -18'sd777;
    rst = 1'b1;
    x15 = '0;
    x16 = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;

    // Impulse: the first non-zero output marks the latency.
    for (int i = 0; i < NCFG; i++) first_nz[i] = -1;
    for (int n = 0; n < 60; n++) begin
      if (n == 0) push(1000, -1000);
      else        push(0, 0);
      @(posedge clk);
      #1;
      check_outputs();
      for (int i = 0; i < NCFG; i++)
        if (first_nz[i] < 0 && y_of(i) != 0) first_nz[i] = n + 1;
      @(negedge clk);
    end
    for (int i = 0; i < NCFG; i++) begin
      checks++;
      if (first_nz[i] == LAT[i]) latency_seen[i]++;
      else begin
        failures++;
        $display("FAIL c%0d: impulse appeared after %0d clocks, expected %0d",
                 i, first_nz[i], LAT[i]);
      end
    end

    // Random full-scale samples.
    for (int n = 0; n < 800; n++) begin
      if (n % 50 >= 7 && n % 50 < 30)  // full-scale runs of equal sign
        push(-16384, -32768);
      else
        push(longint'($signed(15'($urandom))), longint'($signed(16'($urandom))));
      @(posedge clk);
      #1;
      check_outputs();
      @(negedge clk);
    end

    // Reset in the middle of the stream clears every register.
    rst = 1'b1;
    push(0, 0);
    @(posedge clk);
    #1;
    for (int i = 0; i < HIST; i++) begin h15[i] = 0; h16[i] = 0; end
    for (int i = 0; i < NCFG; i++) begin
      checks++;
      if (y_of(i) != 0) begin
        failures++;
        $display("FAIL c%0d: output %0d after reset", i, y_of(i));
      end
    end
    @(negedge clk) rst = 1'b0;
    for (int n = 0; n < 60; n++) begin
      push(longint'($signed(15'($urandom))), longint'($signed(16'($urandom))));
      @(posedge clk);
      #1;
      check_outputs();
      @(negedge clk);
    end

    // Every mechanism must have happened.
    $display("mechanisms: latency c0..c5 = %0d %0d %0d %0d %0d %0d, shift effect = %0d",
             latency_seen[0], latency_seen[1], latency_seen[2], latency_seen[3],
             latency_seen[4], latency_seen[5], shift_effect);
    for (int i = 0; i < NCFG; i++) if (latency_seen[i] == 0) failures++;
    checks++;
    if (shift_effect == 0) failures++;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
