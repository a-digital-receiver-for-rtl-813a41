// Integrated power spectrum and per-channel RFI event counter (RFI flag 2).
//
// For every filter-bank output the power re^2 + im^2 of the 16+16-bit channel
// value is added to that channel's one-second accumulator, and compared with a
// programmable threshold; each exceedance increments the channel's event
// counter. The two channels the filter bank delivers per clock (output
// sequences 1 and 2) are always different channels, so both accumulators are
// updated in the same clock. At the synchronising pulse the accumulators and
// counters are copied to the read-out arrays and restart, so the spectra and
// flags refresh once a second. Tapping the data ahead of the gain stage, the
// squaring, one-second integration and threshold counting follow the source
// description; accumulator widths (56-bit sums, 32-bit counts) are this
// design's choice and hold a full second (1.28 million frames) without
// overflow.
//
// Interface: read port rd_chan -> rd_power / rd_events, one clock latency.
module spectrum_integrator
  import mwa_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        sync,
  input  logic [31:0] threshold,
  input  logic        in_valid,
  input  logic [6:0]  in_slot,
  input  cplx16_t     in1,
  input  cplx16_t     in2,
  input  chan_t       rd_chan,
  output logic [55:0] rd_power,
  output logic [31:0] rd_events
);
  logic [55:0] acc    [NUM_CH];
  logic [31:0] cnt    [NUM_CH];
  logic [55:0] res_p  [NUM_CH];
  logic [31:0] res_e  [NUM_CH];

  function automatic logic [31:0] pwr(input cplx16_t x);
    return 32'(x.re * x.re) + 32'(x.im * x.im);
  endfunction

  chan_t c1, c2;
  logic [31:0] p1, p2;
  assign c1 = chan_t'(in_slot);
  assign c2 = out2_chan(in_slot);
  assign p1 = pwr(in1);
  assign p2 = pwr(in2);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < NUM_CH; c++) begin
        acc[c]   <= '0;
        cnt[c]   <= '0;
        res_p[c] <= '0;
        res_e[c] <= '0;
      end
    end else begin
      if (sync) begin
        for (int c = 0; c < NUM_CH; c++) begin
          res_p[c] <= acc[c];
          res_e[c] <= cnt[c];
          acc[c]   <= '0;
          cnt[c]   <= '0;
        end
      end
      if (in_valid) begin
        acc[c1] <= (sync ? 56'd0 : acc[c1]) + 56'(p1);
        acc[c2] <= (sync ? 56'd0 : acc[c2]) + 56'(p2);
        cnt[c1] <= (sync ? 32'd0 : cnt[c1]) + 32'(p1 > threshold);
        cnt[c2] <= (sync ? 32'd0 : cnt[c2]) + 32'(p2 > threshold);
      end
    end
  end

  always_ff @(posedge clk) begin
    rd_power  <= res_p[rd_chan];
    rd_events <= res_e[rd_chan];
  end
endmodule
