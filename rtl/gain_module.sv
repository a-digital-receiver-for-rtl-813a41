// Per-channel gain multiplier (the "X" between filter bank and channel
// selector).
//
// Each coarse channel is multiplied by its own programmable gain so that the
// pass-band is equalised and the requantiser sees the wanted bit occupancy.
// The filter bank delivers two channels per clock (output sequences 1 and 2),
// so the gain table has two read ports. A gain word is unsigned with GAIN_FRAC
// fractional bits (4096 = 0 dB); the required range of -36 dB to +18 dB
// (0.0158 to 7.94, from the source description) maps to 65..32533. Products
// are rounded to nearest and saturated to 16 bits. The gain word format,
// rounding and reset value (0 dB for every channel) are this design's choices.
//
// Interface: registered, one clock of latency from in_* to out_*. Gains are
// written through wr_en/wr_chan/wr_gain and take effect on the next clock.
module gain_module
  import mwa_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              wr_en,
  input  chan_t             wr_chan,
  input  logic [GAIN_W-1:0] wr_gain,
  input  logic              in_valid,
  input  logic              in_sof,
  input  logic [6:0]        in_slot,
  input  cplx16_t           in1,
  input  cplx16_t           in2,
  output logic              out_valid,
  output logic              out_sof,
  output logic [6:0]        out_slot,
  output cplx16_t           out1,
  output cplx16_t           out2
);
  localparam logic [GAIN_W-1:0] UNITY = GAIN_W'(1 << GAIN_FRAC);
  localparam int PW = PFB_OUT_W + GAIN_W + 1;

  logic [GAIN_W-1:0] gains [NUM_CH];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < NUM_CH; c++) gains[c] <= UNITY;
    end else if (wr_en) begin
      gains[wr_chan] <= wr_gain;
    end
  end

  function automatic logic signed [PFB_OUT_W-1:0] scale(
      input logic signed [PFB_OUT_W-1:0] x, input logic [GAIN_W-1:0] g);
    logic signed [PW-1:0] p;
    localparam logic signed [PW-1:0] MAXP = PW'(32767);
    localparam logic signed [PW-1:0] MINP = -PW'(32768);
    p = (PW'(x) * $signed({1'b0, g}) + (PW'(1) <<< (GAIN_FRAC - 1))) >>> GAIN_FRAC;
    if (p > MAXP) p = MAXP;
    if (p < MINP) p = MINP;
    return PFB_OUT_W'(p);
  endfunction

  chan_t c1, c2;
  assign c1 = chan_t'(in_slot);
  assign c2 = out2_chan(in_slot);

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_slot  <= '0;
      out1      <= '0;
      out2      <= '0;
    end else begin
      out_valid <= in_valid;
      out_sof   <= in_sof;
      out_slot  <= in_slot;
      out1.re   <= scale(in1.re, gains[c1]);
      out1.im   <= scale(in1.im, gains[c1]);
      out2.re   <= scale(in2.re, gains[c2]);
      out2.im   <= scale(in2.im, gains[c2]);
    end
  end
endmodule
