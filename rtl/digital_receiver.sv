// MWA digital receiver: 16 sampling/channelising pipelines and the common
// aggregator of one receiver unit (eight dual-polarised tiles).
//
// Signal path of each pipeline p (0..15, input p = tile p/2, polarisation
// p%2): ADC samples (four 8-bit samples per 163.84 MHz clock) -> optional
// diagnostic pattern -> Walsh demodulator (sign flip, 9-bit) -> ADC power
// monitor (one-second power, RFI flag 1) and polyphase filter bank (256
// channels, 16+16 bits, two per clock) -> optional diagnostic pattern ->
// integrated spectrum / RFI flag 2 -> per-channel gain -> channel selector
// (24-channel sky band, or a full-band burst every 1024 frames) ->
// requantiser (5+5 bits) -> optional diagnostic pattern -> aggregator. The
// aggregator packetises the sky band of all 16 pipelines onto three fibre
// word streams (optional diagnostic pattern at the fibre input); the Gigabit
// Ethernet formatter carries burst spectra, raw ADC samples or one monitored
// sky-band channel. A register file on the host port configures everything
// and reads back the meta-data; the sync generator turns the GPS tick into the
// one-second synchronising pulse that aligns Walsh states, filter-bank frames,
// integrations, burst periods and packet time-stamps.
// The block structure and every stage's function follow the source
// description. Diagnostic patterns are a 16-bit ramp (low bits used at each
// point); the ADC chips, fibre transceivers, Ethernet MAC/PHY and USB bridge
// are outside this module and meet it at its ports.
//
// Interface: one clock domain (the 163.84 MHz processing clock), synchronous
// active-high reset. adc_in is sampled every clock. The host bus is described
// in mc_registers. Fibre streams: 16-bit words with valid and packet
// start/end; Ethernet stream: 32-bit words with valid and record start/end.
module digital_receiver
  import mwa_pkg::*;
#(
  parameter int unsigned CLKS_PER_SEC_P = CLKS_PER_SEC,
  parameter int unsigned WALSH_CLKS_P   = WALSH_STATE_CLKS,
  parameter int unsigned BURST_PERIOD_P = BURST_FRAMES
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        gps_tick,
  input  adc_t        adc_in [NUM_PIPES][SPC],
  // host (monitor-and-control) port
  input  logic        bus_we,
  input  logic        bus_re,
  input  logic [15:0] bus_addr,
  input  logic [31:0] bus_wdata,
  output logic [31:0] bus_rdata,
  output logic        bus_rvalid,
  // fibre word streams to the transceivers
  output logic [FIBER_W-1:0] fib_data [NUM_FIBERS],
  output logic        fib_valid [NUM_FIBERS],
  output logic        fib_sop   [NUM_FIBERS],
  output logic        fib_eop   [NUM_FIBERS],
  // Gigabit Ethernet record stream
  output logic [31:0] gbe_data,
  output logic        gbe_valid,
  output logic        gbe_sop,
  output logic        gbe_eop,
  // timing and Walsh switching signals
  output logic        sync,
  output logic        walsh_neg [NUM_PIPES]
);
  // ------------------------------------------------------------ control
  mode_e       mode;
  diag_t       diag;
  logic [7:0]  node_id;
  logic        walsh_en, rearm, locked;
  logic [31:0] adc_thresh, ch_thresh;
  logic [4:0]  mon_slot;
  logic        gain_wr_en [NUM_PIPES];
  chan_t       gain_wr_chan;
  logic [GAIN_W-1:0] gain_wr_val;
  logic        tbl_wr_en;
  logic [4:0]  tbl_wr_idx;
  chan_t       tbl_wr_chan;
  chan_t       spec_rd_chan;
  logic [47:0] adc_power  [NUM_PIPES];
  logic [31:0] adc_rfi    [NUM_PIPES];
  logic        adc_flag   [NUM_PIPES];
  logic [55:0] spec_power [NUM_PIPES];
  logic [31:0] spec_events[NUM_PIPES];
  logic [15:0] pattern;

  sync_pulse_gen #(.CLKS_PER_SEC(CLKS_PER_SEC_P)) u_sync (
    .clk, .rst, .gps_tick, .rearm, .sync, .locked);

  diag_pattern #(.W(16)) u_pat (.clk, .rst, .sync, .pattern);

  mc_registers u_regs (
    .clk, .rst, .bus_we, .bus_re, .bus_addr, .bus_wdata, .bus_rdata, .bus_rvalid,
    .mode, .diag, .node_id, .walsh_en, .adc_thresh, .ch_thresh, .mon_slot, .rearm, .locked,
    .gain_wr_en, .gain_wr_chan, .gain_wr_val, .tbl_wr_en, .tbl_wr_idx, .tbl_wr_chan,
    .adc_power, .adc_rfi, .adc_flag, .spec_rd_chan, .spec_power, .spec_events);

  // ------------------------------------------------------------ pipelines
  adc_t    adc_d   [NUM_PIPES][SPC];
  logic    ch_valid[NUM_PIPES];
  logic [4:0] ch_slot [NUM_PIPES];
  cplx5_t  ch_q    [NUM_PIPES];
  logic    agg_valid[NUM_PIPES];
  logic [4:0] agg_slot[NUM_PIPES];
  cplx5_t  agg_data[NUM_PIPES];
  logic    b_valid [NUM_PIPES];
  logic [6:0] b_slot [NUM_PIPES];
  cplx16_t b1 [NUM_PIPES];
  cplx16_t b2 [NUM_PIPES];

  for (genvar p = 0; p < NUM_PIPES; p++) begin : g_pipe
    pfbin_t  wout [SPC];
    logic    pf_valid, pf_sof, g_valid, g_sof;
    logic [6:0] pf_slot, g_slot;
    cplx16_t pf1, pf2, d1, d2, g1, g2;
    logic    s_valid;
    logic [4:0] s_slot;
    cplx16_t s_data;
    logic [3:0] wstate;

    always_comb
      for (int i = 0; i < SPC; i++)
        adc_d[p][i] = diag.adc_out ? adc_t'(pattern[7:0] + 8'(i)) : adc_in[p][i];

    walsh_demod #(.PIPE_ID(p), .STATE_CLKS(WALSH_CLKS_P)) u_walsh (
      .clk, .rst, .sync, .enable(walsh_en), .din(adc_d[p]), .dout(wout),
      .walsh_neg(walsh_neg[p]), .walsh_state(wstate));

    adc_power_monitor u_pwr (
      .clk, .rst, .sync, .din(wout), .threshold(adc_thresh),
      .power_sec(adc_power[p]), .rfi_count(adc_rfi[p]), .rfi_flag(adc_flag[p]));

    pfb u_pfb (
      .clk, .rst, .sync, .din(wout), .out_valid(pf_valid), .out_sof(pf_sof),
      .out_slot(pf_slot), .out1(pf1), .out2(pf2));

    assign d1 = diag.pfb_out ? cplx16_t'({pattern, pattern}) : pf1;
    assign d2 = diag.pfb_out ? cplx16_t'({pattern, ~pattern}) : pf2;

    spectrum_integrator u_spec (
      .clk, .rst, .sync, .threshold(ch_thresh), .in_valid(pf_valid), .in_slot(pf_slot),
      .in1(d1), .in2(d2), .rd_chan(spec_rd_chan),
      .rd_power(spec_power[p]), .rd_events(spec_events[p]));

    gain_module u_gain (
      .clk, .rst, .wr_en(gain_wr_en[p]), .wr_chan(gain_wr_chan), .wr_gain(gain_wr_val),
      .in_valid(pf_valid), .in_sof(pf_sof), .in_slot(pf_slot), .in1(d1), .in2(d2),
      .out_valid(g_valid), .out_sof(g_sof), .out_slot(g_slot), .out1(g1), .out2(g2));

    channel_selector #(.BURST_PERIOD(BURST_PERIOD_P)) u_sel (
      .clk, .rst, .sync, .mode, .tbl_wr_en, .tbl_wr_idx, .tbl_wr_chan,
      .in_valid(g_valid), .in_slot(g_slot), .in1(g1), .in2(g2),
      .ch_valid(s_valid), .ch_slot(s_slot), .ch_data(s_data),
      .b_valid(b_valid[p]), .b_slot(b_slot[p]), .b1(b1[p]), .b2(b2[p]));

    requantizer u_rq (
      .clk, .rst, .in_valid(s_valid), .in_slot(s_slot), .din(s_data),
      .out_valid(ch_valid[p]), .out_slot(ch_slot[p]), .dout(ch_q[p]));

    assign agg_valid[p] = ch_valid[p];
    assign agg_slot[p]  = ch_slot[p];
    assign agg_data[p]  = diag.agg_in ? cplx5_t'(pattern[9:0] + 10'(p)) : ch_q[p];

    // g_sof and the Walsh state index are not needed further downstream.
    logic unused;
    assign unused = ^{g_sof, wstate};
  end

  // ------------------------------------------------------------ aggregation
  logic [FIBER_W-1:0] agg_fib [NUM_FIBERS];

  aggregator u_agg (
    .clk, .rst, .sync, .node_id, .in_valid(agg_valid), .in_slot(agg_slot), .in_data(agg_data),
    .fib_data(agg_fib), .fib_valid, .fib_sop, .fib_eop);

  always_comb
    for (int f = 0; f < NUM_FIBERS; f++)
      fib_data[f] = diag.fiber_in ? pattern + 16'(f) : agg_fib[f];

  gbe_formatter #(.BURST_PERIOD(BURST_PERIOD_P)) u_gbe (
    .clk, .rst, .sync, .mode, .mon_slot, .b_valid, .b_slot, .b1, .b2, .adc(adc_d),
    .ch_valid, .ch_slot, .ch_data(ch_q), .gbe_data, .gbe_valid, .gbe_sop, .gbe_eop);
endmodule
