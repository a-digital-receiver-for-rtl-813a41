// Walsh demodulator for one signal pipeline.
//
// The tile beamformer can switch the phase of its signal by 180 degrees in a
// 16-state Walsh sequence; this block undoes it by negating the digitised
// samples in the states where the sequence is -1. Each state lasts 625 us,
// i.e. 100 sets of 4096 ADC samples = 102400 processing clocks at four samples
// per clock, so the 16 states repeat every 10 ms. The state counter restarts
// on the one-second synchronising pulse so all pipelines and receivers switch
// together. These timings and the sign-flip mechanism follow the source
// description. The contents of the demodulation table are not published; this
// design uses row PIPE_ID of the 16x16 Sylvester-Hadamard matrix (sign bit =
// parity of PIPE_ID & state), which gives each of the 16 inputs its own
// orthogonal sequence. Samples are sign-extended to 9 bits so that -128 can be
// negated without overflow, as the filter bank expects 9-bit inputs.
//
// Interface: four samples per clock in, four 9-bit samples out one clock
// later. `walsh_neg` is the current switching signal, made available to drive
// external phase modulators. With `enable` low the samples pass unmodified
// (the feature is off in normal field operation).
module walsh_demod
  import mwa_pkg::*;
#(
  parameter int unsigned PIPE_ID    = 0,
  parameter int unsigned STATE_CLKS = WALSH_STATE_CLKS
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   sync,
  input  logic   enable,
  input  adc_t   din  [SPC],
  output pfbin_t dout [SPC],
  output logic   walsh_neg,
  output logic [3:0] walsh_state
);
  localparam int CW = $clog2(STATE_CLKS + 1);
  logic [CW-1:0] cnt;
  logic [3:0]    state;

  always_ff @(posedge clk) begin
    if (rst || sync) begin
      cnt   <= '0;
      state <= '0;
    end else if (cnt == CW'(STATE_CLKS - 1)) begin
      cnt   <= '0;
      state <= state + 4'd1;
    end else begin
      cnt <= cnt + CW'(1);
    end
  end

  // Hadamard row PIPE_ID, column `state`: -1 when the parity is odd.
  logic neg;
  assign neg = enable && ^(4'(PIPE_ID) & state);
  assign walsh_neg   = neg;
  assign walsh_state = state;

  always_ff @(posedge clk) begin
    for (int i = 0; i < SPC; i++)
      dout[i] <= neg ? -pfbin_t'(din[i]) : pfbin_t'(din[i]);
  end
endmodule
