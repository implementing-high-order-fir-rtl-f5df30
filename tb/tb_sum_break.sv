// tb_sum_break: self-checking test of the running-sum break registers.
//
// A z^-1 and a z^-2 break on a 36-bit running sum are fed random values;
// each output must equal the input of one and two clocks earlier, tracked
// here with a history, and both must read zero after reset.
module tb_sum_break;
  logic clk = 1'b0;
  logic rst;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [35:0] d, q1, q2;
  logic [35:0] h1, h2;  // d one and two clocks ago

  sum_break #(.W(36), .DEPTH(1)) u_z1 (.clk, .rst, .d, .q(q1));
  sum_break #(.W(36), .DEPTH(2)) u_z2 (.clk, .rst, .d, .q(q2));

  task automatic check(string what, logic [35:0] got, logic [35:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
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
    d = 36'h123456789;
    repeat (3) @(posedge clk);
    #1;
    check("reset z1", q1, '0);
    check("reset z2", q2, '0);
    h1 = '0; h2 = '0;
    @(negedge clk) rst = 1'b0;
    for (int n = 0; n < 500; n++) begin
      d = {4'($urandom), 32'($urandom)};
      @(posedge clk);
      h2 = h1; h1 = d;
      #1;
      check("z1", q1, h1);
      check("z2", q2, h2);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
