// Diagnostic test-pattern generator.
//
// In the diagnostic mode the receiver replaces the data at one of four points
// of the signal path (ADC output, filter-bank output, aggregator input, fibre
// input) with a known pattern so that a fault can be located by checking which
// downstream stage still reproduces it. The source description names the
// injection points but not the pattern; this design uses a free-running
// W-bit ramp that advances by STEP every clock and restarts on the
// synchronising pulse, so a checker can predict every value from the pulse.
//
// Interface: `pattern` is valid every clock; it is 0 in the clock after sync.
module diag_pattern #(
  parameter int unsigned W    = 16,
  parameter int unsigned STEP = 1
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         sync,
  output logic [W-1:0] pattern
);
  always_ff @(posedge clk) begin
    if (rst || sync) pattern <= '0;
    else             pattern <= pattern + W'(STEP);
  end
endmodule
