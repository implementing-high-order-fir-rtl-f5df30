// tb_sample_delay_line: self-checking test of the sample tap lines.
//
// Four lines of six elements (12 taps) are driven with the same random
// 8-bit samples: without breaks, with a z^-2 break in front of every second
// element, with a z^-1 break in front of every element, and with z^-1
// breaks in front of elements 1 and 4 only, given as a position mask. A history of
// the applied samples is kept here; after every clock each element's new
// tap must equal the sample b_k cycles old and its old tap the sample
// 1+2k+b_k cycles old, where b_k is counted here from the break layout.
// Reset must clear every register stage.
module tb_sample_delay_line;
  localparam int NT = 12;
  localparam int K  = NT / 2;
  localparam int HIST = 64;

  logic clk = 1'b0;
  logic rst;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [7:0] x;
  logic [K-1:0][7:0] new0, old0, new1, old1, new2, old2, new3, old3;

  sample_delay_line #(.N_TAPS(NT), .W_X(8), .BREAK_EVERY(0), .BREAK_DEPTH(1))
    u_none (.clk, .rst, .x, .tap_new(new0), .tap_old(old0));
  sample_delay_line #(.N_TAPS(NT), .W_X(8), .BREAK_EVERY(2), .BREAK_DEPTH(2))
    u_part (.clk, .rst, .x, .tap_new(new1), .tap_old(old1));
  sample_delay_line #(.N_TAPS(NT), .W_X(8), .BREAK_EVERY(1), .BREAK_DEPTH(1))
    u_full (.clk, .rst, .x, .tap_new(new2), .tap_old(old2));
  sample_delay_line #(.N_TAPS(NT), .W_X(8), .BREAK_EVERY(0), .BREAK_DEPTH(1),
                      .BREAK_MASK(fir_pkg::break_mask_t'('b10010)))
    u_mask (.clk, .rst, .x, .tap_new(new3), .tap_old(old3));

  // hist[i] = sample applied i clocks before the current one; 0 before reset end.
  logic [7:0] hist [HIST];

  function automatic int breaks_before(int k, int every, int depth);
    int b = 0;
    for (int j = 1; j <= k; j++) if (every != 0 && j % every == 0) b += depth;
    return b;
  endfunction

  task automatic check(string what, int k, logic [7:0] got, logic [7:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s k=%0d: got %0d expected %0d", what, k, got, exp);
    end
  endtask

  task automatic check_all();
    int bk;
    for (int k = 0; k < K; k++) begin
      check("none new", k, new0[k], hist[0]);
      check("none old", k, old0[k], hist[1 + 2*k]);
      bk = breaks_before(k, 2, 2);
      check("part new", k, new1[k], hist[bk]);
      check("part old", k, old1[k], hist[1 + 2*k + bk]);
      bk = breaks_before(k, 1, 1);
      check("full new", k, new2[k], hist[bk]);
      check("full old", k, old2[k], hist[1 + 2*k + bk]);
      bk = (k >= 1) + (k >= 4);
      check("mask new", k, new3[k], hist[bk]);
      check("mask old", k, old3[k], hist[1 + 2*k + bk]);
    end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1;
    x = 8'h5a;
    repeat (3) @(posedge clk);
    @(negedge clk);
    for (int i = 0; i < HIST; i++) hist[i] = 8'h00;
    hist[0] = x;
    check_all();             // all stages cleared by reset
    rst = 1'b0;
    for (int n = 0; n < 500; n++) begin
      @(posedge clk);
      @(negedge clk);
      for (int i = HIST - 1; i > 0; i--) hist[i] = hist[i-1];
      x = 8'($urandom);
      hist[0] = x;
      #1;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
