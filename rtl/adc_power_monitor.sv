// ADC output power monitor and time-domain RFI event counter (RFI flag 1).
//
// Every clock the four 9-bit samples of one input are squared and summed. Two
// integrators run on that sum: a one-second integrator (cleared by the
// synchronising pulse) gives the ADC output power meta-data, and a short
// integrator over WIN_CLKS clocks gives the power used for event detection.
// Each time a short-window power exceeds the programmable threshold the event
// counter is incremented. At every synchronising pulse the one-second power
// and the event count are latched into the read-out registers and the
// integrators restart, so the meta-data refresh once a second. Squaring,
// one-second integration and counting threshold exceedances follow the source
// description; the short window length (one filter-bank frame, 512 samples by
// default) and the register widths are this design's choices.
//
// Interface: samples every clock; power_sec / rfi_count / rfi_flag change only
// in the clock after sync.
module adc_power_monitor
  import mwa_pkg::*;
#(
  parameter int unsigned WIN_CLKS = FFT_N / SPC
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        sync,
  input  pfbin_t      din [SPC],
  input  logic [31:0] threshold,
  output logic [47:0] power_sec,
  output logic [31:0] rfi_count,
  output logic        rfi_flag
);
  localparam int WW = $clog2(WIN_CLKS);
  logic [19:0]   sq_sum;           // four squares of 9-bit values
  logic [47:0]   acc_sec;
  logic [31:0]   acc_win;
  logic [31:0]   events;
  logic [WW-1:0] wcnt;

  always_comb begin
    sq_sum = '0;
    for (int i = 0; i < SPC; i++) sq_sum += 20'(din[i] * din[i]);
  end

  logic win_end;
  logic [31:0] win_total;
  assign win_end   = (wcnt == WW'(WIN_CLKS - 1));
  assign win_total = acc_win + 32'(sq_sum);

  always_ff @(posedge clk) begin
    if (rst) begin
      acc_sec   <= '0;
      acc_win   <= '0;
      events    <= '0;
      wcnt      <= '0;
      power_sec <= '0;
      rfi_count <= '0;
      rfi_flag  <= 1'b0;
    end else if (sync) begin
      power_sec <= acc_sec;
      rfi_count <= events;
      rfi_flag  <= (events != 0);
      acc_sec   <= 48'(sq_sum);
      acc_win   <= 32'(sq_sum);
      events    <= '0;
      wcnt      <= WW'(1);
    end else begin
      acc_sec <= acc_sec + 48'(sq_sum);
      if (win_end) begin
        acc_win <= '0;
        if (win_total > threshold) events <= events + 32'd1;
      end else begin
        acc_win <= win_total;
      end
      wcnt <= win_end ? '0 : wcnt + WW'(1);
    end
  end
endmodule
