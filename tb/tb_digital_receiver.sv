// End-to-end testbench of the digital receiver at its full default size
// (16 inputs, 256 channels, 1024-frame burst period, 625 us Walsh states,
// 163.84 MHz one-second divider). Each input carries a tone in coarse channel
// 30 plus noise, with a different amplitude per input. The host port sets the
// receiver up as in the published start-up sequence (registers, then mode),
// and the test then walks through:
//   channel mode  - fibre packets: marker, node id, sequence, checksum, and
//                   the tone channel (slot 0) must be the strongest of the 24;
//                   GbE channel-monitor records
//   meta-data     - a re-armed sync (GPS tick) closes an integration; ADC
//                   power, RFI flags and the integrated spectrum are read back
//   burst mode    - 16 full-band records, peak at channel 30 in each
//   raw mode      - 16 records of ADC samples equal to the driven input
//   diagnostics   - pattern injected at the fibre input, ADC output and
//                   filter-bank output, each recognised downstream
//   Walsh         - the switching signal changes state after 102400 clocks
// Every mechanism is counted; one that never happens is a failure.
module tb_digital_receiver;
  import mwa_pkg::*;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst = 1, gps_tick = 0;
  adc_t adc_in [NUM_PIPES][SPC];
  logic bus_we = 0, bus_re = 0; logic [15:0] bus_addr = 0; logic [31:0] bus_wdata = 0, bus_rdata; logic bus_rvalid;
  logic [FIBER_W-1:0] fib_data [NUM_FIBERS]; logic fib_valid [NUM_FIBERS], fib_sop [NUM_FIBERS], fib_eop [NUM_FIBERS];
  logic [31:0] gbe_data; logic gbe_valid, gbe_sop, gbe_eop;
  logic sync; logic walsh_neg [NUM_PIPES];
  int checks = 0, failures = 0;

  digital_receiver dut (.*);
  always #3 clk = ~clk;

  // ---------------------------------------------------------------- input
  longint t = 0;                 // clock count since the last sync
  logic adc_pat = 0;
  function automatic adc_t xin(input int p, input longint n);
    real v = (20.0 + 4.0 * p) * $cos(2.0 * PI * 30.25 * real'(n) / 512.0 + 0.1 * p);
    return adc_t'($rtoi(v) + int'((n * 7 + p * 3) % 9) - 4);
  endfunction
  always @(posedge clk) begin
    t <= sync ? 1 : t + 1;
    for (int p = 0; p < NUM_PIPES; p++)
      for (int i = 0; i < SPC; i++) adc_in[p][i] <= xin(p, SPC * (sync ? 1 : t + 1) + i);
  end

  // ---------------------------------------------------------------- host
  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(posedge clk); bus_we <= 1; bus_addr <= a; bus_wdata <= d; @(posedge clk); bus_we <= 0;
  endtask
  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(posedge clk); bus_re <= 1; bus_addr <= a; @(posedge clk); bus_re <= 0;
    @(posedge clk); @(posedge clk); d = bus_rdata;
  endtask
  task automatic gps();
    @(posedge clk); gps_tick <= 1; @(posedge clk); gps_tick <= 0;
  endtask
  task automatic resync();               // re-arm and align to a new GPS tick
    wr(16'h0007, 0); repeat (3) @(posedge clk); gps();
  endtask
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL at %0t: %s", $time, what); end
  endtask

  // ---------------------------------------------------------------- monitors
  int n_pkt = 0, n_pkt_tone = 0, n_mon = 0, n_burst = 0, n_burst_peak = 0, n_raw = 0, n_raw_ok = 0;
  int n_fib_pat = 0, n_adc_pat = 0, n_pfb_pat = 0, n_walsh = 0;
  logic diag_fiber_on = 0, diag_pfb_on = 0;
  // fibre 0 packets
  int wi = 0; logic [15:0] cs; logic [15:0] pw [87]; logic [15:0] prev_w; logic prev_v = 0;
  always @(posedge clk) if (!rst) begin
    if (fib_valid[0] && !diag_fiber_on) begin
      if (fib_sop[0]) wi = 0;
      if (wi >= 0 && wi < 87) pw[wi] = fib_data[0];
      wi++;
      if (fib_eop[0] && wi > 0) begin
        automatic logic [15:0] s = 0;
        automatic int best = -1, bslot = -1;
        for (int k = 0; k < 86; k++) s += pw[k];
        chk(wi == 87 && pw[0] == 16'h4D57 && pw[1] == 16'h2A00 && pw[86] == s, "fibre packet format");
        // slot c of input 15 (strongest tone): payload sample 16c+15
        for (int c = 0; c < 8; c++) begin
          automatic int b = 10 * (16 * c + 15);
          automatic logic [1279:0] pl;
          for (int k = 0; k < 80; k++) pl[16*k +: 16] = pw[6 + k];
          begin
            automatic int re = int'($signed(pl[b + 5 +: 5])), im = int'($signed(pl[b +: 5]));
            if (re*re + im*im > best) begin best = re*re + im*im; bslot = c; end
          end
        end
        n_pkt++;
        if (bslot == 0) n_pkt_tone++;
      end
    end
    // a packet cut by a pattern on/off switch is not checked
    if (diag_fiber_on) wi = -1000;
    if (fib_valid[0] && diag_fiber_on) begin
      if (prev_v && fib_data[0] == prev_w + 16'd1) n_fib_pat++;
    end
    prev_v = fib_valid[0]; prev_w = fib_data[0];
  end
  // GbE records
  int gw = 0, gkind = 0, gpipe = 0; logic [31:0] gbuf [257];
  always @(posedge clk) if (!rst && gbe_valid) begin
    if (gbe_sop) begin gw = 0; gkind = int'(gbe_data[19:18]); gpipe = int'(gbe_data[15:12]); end
    gbuf[gw] = gbe_data; gw++;
    if (gbe_eop) begin
      if (gkind == 0) begin n_mon++; chk(gw == 9, "monitor record length"); end
      if (gkind == 1) begin
        automatic longint best = -1; automatic int bc = -1;
        automatic logic same = 1;
        chk(gw == 257, "burst record length");
        for (int c = 1; c < 256; c++) begin
          automatic longint re = longint'($signed(gbuf[1 + c][31:16])), im = longint'($signed(gbuf[1 + c][15:0]));
          if (re*re + im*im > best) begin best = re*re + im*im; bc = c; end
          if (c < 128 && gbuf[1 + c][31:16] != gbuf[1 + c][15:0]) same = 0;
        end
        n_burst++;
        if (diag_pfb_on) begin if (same) n_pfb_pat++; end
        else if (bc == 30) n_burst_peak++;
      end
      if (gkind == 2) begin
        automatic logic ok = 0, pat = 1;
        chk(gw == 65, "raw record length");
        for (int o = -4; o <= 4; o++) begin
          automatic logic m = 1;
          for (int j = 0; j < 256; j++)
            if (gbuf[1 + j / 4][8 * (j % 4) +: 8] != xin(gpipe, j + o)) m = 0;
          if (m) ok = 1;
        end
        for (int j = 0; j < 64; j++)
          for (int i = 1; i < 4; i++)
            if (gbuf[1 + j][8*i +: 8] != gbuf[1 + j][7:0] + 8'(i)) pat = 0;
        n_raw++;
        if (adc_pat) begin if (pat) n_adc_pat++; end
        else if (ok) n_raw_ok++;
      end
    end
  end
  logic wprev = 0;
  always @(posedge clk) begin
    if (!rst && walsh_neg[1] != wprev) n_walsh++;
    wprev <= walsh_neg[1];
  end

  // ---------------------------------------------------------------- sequence
  initial begin
    logic [31:0] d, lo, hi, s30, s100;
    repeat (4) @(posedge clk); rst <= 0;
    // stage 2: registers (node id, thresholds, channel table)
    wr(16'h0002, 32'h2A);
    wr(16'h0004, 32'd5000);
    wr(16'h0005, 32'd1_000_000);
    wr(16'h0100, 30);
    for (int i = 1; i < NUM_SEL; i++) wr(16'h0100 + 16'(i), 32'(100 + 5 * i));
    wr(16'h0006, 0);                       // monitor slot 0
    // stage 3: channel mode, aligned to the GPS tick
    gps();
    repeat (128 * 14) @(posedge clk);
    chk(n_pkt >= 10 && n_pkt_tone == n_pkt, "channel mode packets carry the tone in slot 0");
    chk(n_mon >= 10, "channel monitor records");
    // close an integration and read the meta-data
    resync();
    repeat (10) @(posedge clk);
    rd(16'h2000 + 16'(4 * 15), lo); rd(16'h2001 + 16'(4 * 15), hi);
    chk({hi, lo} > 64'd1_000_000, "ADC power of input 15");
    rd(16'h2002, d); chk(d > 0, "time-domain RFI count of input 0");
    rd(16'h2003, d); chk(d == 1, "RFI flag 1 of input 0");
    rd(16'h4000 + 16'(256 * 15 + 30), s30); rd(16'h4000 + 16'(256 * 15 + 100), s100);
    chk(s30 > 100 * s100, "integrated spectrum peaks at channel 30");
    rd(16'h6000 + 16'(256 * 15 + 30), d); chk(d > 0, "RFI flag 2 events in channel 30");
    rd(16'h6000 + 16'(256 * 15 + 100), d); chk(d == 0, "no RFI events in channel 100");
    // burst mode: one burst at the first frame after the sync
    wr(16'h0000, 1);
    resync();
    repeat (128 * 12 + 16 * 257 + 400) @(posedge clk);
    chk(n_burst == 16 && n_burst_peak == 16, "burst mode: 16 spectra peaking at channel 30");
    // filter-bank output pattern, seen in a burst
    wr(16'h0001, 32'b0100); diag_pfb_on = 1;
    resync();
    repeat (128 * 12 + 16 * 257 + 400) @(posedge clk);
    wr(16'h0001, 0); diag_pfb_on = 0;
    // raw mode
    wr(16'h0000, 2);
    resync();
    repeat (64 + 16 * 65 + 200) @(posedge clk);
    chk(n_raw == 16 && n_raw_ok == 16, "raw mode: 16 records equal to the ADC input");
    // ADC output pattern, seen in raw mode
    wr(16'h0001, 32'b0001); adc_pat = 1;
    resync();
    repeat (64 + 16 * 65 + 200) @(posedge clk);
    wr(16'h0001, 0); adc_pat = 0;
    // fibre input pattern in channel mode
    wr(16'h0000, 0);
    wr(16'h0001, 32'b1000); diag_fiber_on = 1;
    repeat (128 * 3) @(posedge clk);
    wr(16'h0001, 0);
    repeat (200) @(posedge clk); diag_fiber_on = 0;
    // Walsh switching: enable and run through one state change
    wr(16'h0003, 1);
    resync();
    repeat (WALSH_STATE_CLKS + 100) @(posedge clk);
    chk(n_walsh >= 1, "Walsh state change on input 1");
    chk(n_pfb_pat >= 16, "filter-bank output pattern");
    chk(n_adc_pat >= 16, "ADC output pattern");
    chk(n_fib_pat >= 50, "fibre input pattern");
    $display("mechanisms: packets=%0d tone=%0d monitor=%0d burst=%0d raw=%0d pfb_pat=%0d adc_pat=%0d fib_pat=%0d walsh=%0d",
             n_pkt, n_pkt_tone, n_mon, n_burst, n_raw, n_pfb_pat, n_adc_pat, n_fib_pat, n_walsh);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
