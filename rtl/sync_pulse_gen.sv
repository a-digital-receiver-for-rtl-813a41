// Synchronising-pulse generator (the digital part of the clock module).
//
// After reset, or after the controller asks for re-initialisation with
// `rearm`, the generator waits for the GPS-derived one-second tick, emits a
// one-clock pulse aligned to it and from then on derives every further pulse
// purely by dividing the 163.84 MHz processing clock by CLKS_PER_SEC, ignoring
// later GPS ticks. This is the behaviour the source description gives; the
// re-arm input stands for its "SBC can reinitialise the clock-module" port and
// its exact form is this design's choice.
//
// Interface: gps_tick is a single-clock pulse in the processing-clock domain.
// `sync` is high for exactly one clock (6.1 ns at 163.84 MHz), in the clock
// after the aligning GPS tick and then every CLKS_PER_SEC clocks. `locked` is
// high once the first tick has been seen.
module sync_pulse_gen #(
  parameter int unsigned CLKS_PER_SEC = 163_840_000
) (
  input  logic clk,
  input  logic rst,
  input  logic gps_tick,
  input  logic rearm,
  output logic sync,
  output logic locked
);
  localparam int CW = $clog2(CLKS_PER_SEC);
  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst || rearm) begin
      locked <= 1'b0;
      cnt    <= '0;
      sync   <= 1'b0;
    end else if (!locked) begin
      sync <= gps_tick;
      if (gps_tick) begin
        locked <= 1'b1;
        cnt    <= '0;
      end
    end else begin
      sync <= (cnt == CW'(CLKS_PER_SEC - 1));
      cnt  <= (cnt == CW'(CLKS_PER_SEC - 1)) ? '0 : cnt + CW'(1);
    end
  end
endmodule
