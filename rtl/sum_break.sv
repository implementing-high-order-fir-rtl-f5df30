// sum_break: a break in the systolic running sum, DEPTH registers deep.
//
// Between two DSP elements the running sum normally travels on the DSP
// cascade route with the single pipeline register of the previous element.
// A break adds DEPTH more registers in the general fabric (the paper
// evaluates z^-1 and z^-2 breaks), which cuts the dedicated cascade so the
// filter can span several DSP columns and shortens the long routes between
// them. q is d delayed by DEPTH clock cycles; the synchronous, active-high
// reset clears the registers (reset is this design's choice). The matching
// delay of the sample taps is added in sample_delay_line.
module sum_break #(
  parameter int unsigned W     = 36,
  parameter int unsigned DEPTH = 1
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  if (DEPTH < 1) begin : g_bad_depth
    $error("sum_break: DEPTH must be at least 1");
  end

  logic [DEPTH-1:0][W-1:0] stage;

  always_ff @(posedge clk) begin
    if (rst) begin
      stage <= '0;
    end else begin
      stage[0] <= d;
      for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
    end
  end

  assign q = stage[DEPTH-1];

endmodule
