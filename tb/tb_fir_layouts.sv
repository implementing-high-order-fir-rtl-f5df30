// tb_fir_layouts: the four running-sum layouts of the published evaluation
// at full size: 180 taps on 90 elements, default widths.
//
//   straightforward    no break                     latency 1
//   partial break      z^-1 every 30 elements       latency 3
//   full break z^-1    behind every element         latency 90
//   full break z^-2    two registers behind each    latency 179
// The partial-break period of 30 stands for three DSP columns of 30 slices;
// the real column length of the evaluated devices is not part of the
// filter. The latencies are worked out by hand from the layouts.
//
// All four filters hold the same 180-tap low-pass (Nuttall window, cut-off
// 0.11 fs, 18-bit coefficients) and receive the same samples: an impulse,
// then random and full-scale input. Each output is compared every clock
// with the direct-form convolution delayed by that layout's latency, so all
// four must compute the same filter and differ only in latency.
module tb_fir_layouts;
  import tb_fir_util_pkg::*;

  localparam int NT   = 180;
  localparam int K    = NT / 2;
  localparam int NL   = 4;
  localparam int HIST = 512;
  localparam int LAT [NL] = '{1, 3, 90, 179};
  localparam real FC = 0.11;

  logic clk = 1'b0;
  logic rst;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic signed [14:0] x;
  logic [K-1:0][17:0] coef;
  logic signed [35:0] y [NL];
  longint h [NT];
  longint hist [HIST];

  fir_systolic #(.BREAK_EVERY(0))                  u_plain   (.clk, .rst, .x, .coef, .y(y[0]));
  fir_systolic #(.BREAK_EVERY(30), .BREAK_DEPTH(1)) u_partial (.clk, .rst, .x, .coef, .y(y[1]));
  fir_systolic #(.BREAK_EVERY(1),  .BREAK_DEPTH(1)) u_full1   (.clk, .rst, .x, .coef, .y(y[2]));
  fir_systolic #(.BREAK_EVERY(1),  .BREAK_DEPTH(2)) u_full2   (.clk, .rst, .x, .coef, .y(y[3]));

  task automatic push(longint s);
    for (int i = HIST - 1; i > 0; i--) hist[i] = hist[i-1];
    hist[0] = s;
    x = 15'(s);
  endtask

  function automatic longint ref_out(int lat);
    longint acc = 0;
    for (int t = 0; t < NT; t++) acc += h[t] * hist[t + lat - 1];
    return wrap(acc, 36);
  endfunction

  task automatic check_all();
    for (int l = 0; l < NL; l++) begin
      longint e;
      e = ref_out(LAT[l]);
      checks++;
      if (longint'(y[l]) != e) begin
        failures++;
        if (failures < 20) $display("FAIL layout %0d: y=%0d expected %0d", l, y[l], e);
      end
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

    for (int n = 0; n < 2500; n++) begin
      if (n == 0)                          push(16383);
      else if (n < 400)                    push(0);
      else if (n % 500 >= 100 && n % 500 < 300) push((n % 1000 < 500) ? 16383 : -16384);
      else                                 push(longint'($signed(15'($urandom))));
      @(posedge clk);
      #1;
      check_all();
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
