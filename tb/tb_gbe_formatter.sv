// Testbench for the Gigabit Ethernet formatter. Runs the three record kinds
// one after another and checks each record's header and every data word:
// channel-monitor records (one per frame, slot mon_slot of all 16 inputs),
// a burst set (16 records of 256 channels) and a raw set (16 records of 256
// ADC samples captured at the start of the burst period).
module tb_gbe_formatter;
  import mwa_pkg::*;
  localparam int BP = 16;
  logic clk = 0, rst = 1, sync = 0;
  mode_e mode = MODE_CHANNEL;
  logic [4:0] mon_slot = 5'd7;
  logic b_valid [NUM_PIPES]; logic [6:0] b_slot [NUM_PIPES]; cplx16_t b1 [NUM_PIPES], b2 [NUM_PIPES];
  adc_t adc [NUM_PIPES][SPC];
  logic ch_valid [NUM_PIPES]; logic [4:0] ch_slot [NUM_PIPES]; cplx5_t ch_data [NUM_PIPES];
  logic [31:0] gbe_data; logic gbe_valid, gbe_sop, gbe_eop;
  int checks = 0, failures = 0;
  gbe_formatter #(.BURST_PERIOD(BP)) dut (.*);
  always #5 clk = ~clk;
  int cyc = 0;                                  // clocks since sync
  function automatic logic [9:0] chv(input int p, input int s, input int fr); return 10'(p * 31 + s * 7 + fr * 3); endfunction
  function automatic logic [31:0] bv(input int p, input int c); return {16'(p * 1000 + c), 16'(-c)}; endfunction
  function automatic logic [7:0] rv(input int p, input int n); return 8'(p * 13 + n); endfunction
  int fr = 0;
  initial begin
    for (int p = 0; p < NUM_PIPES; p++) begin b_valid[p] = 0; b_slot[p] = 0; b1[p] = 0; b2[p] = 0; ch_valid[p] = 0; ch_slot[p] = 0; ch_data[p] = 0;
      for (int i = 0; i < SPC; i++) adc[p][i] = 0; end
    repeat (3) @(posedge clk); rst <= 0;
    // channel mode: 3 frames
    for (fr = 0; fr < 3; fr++)
      for (int k = 0; k < 128; k++) begin
        for (int p = 0; p < NUM_PIPES; p++) begin
          ch_valid[p] <= k < 24; ch_slot[p] <= 5'(k); ch_data[p] <= cplx5_t'(chv(p, k, fr));
        end
        @(posedge clk);
      end
    for (int p = 0; p < NUM_PIPES; p++) ch_valid[p] <= 0;
    // burst mode: one burst
    mode <= MODE_BURST;
    for (int k = 0; k < 128; k++) begin
      for (int p = 0; p < NUM_PIPES; p++) begin
        b_valid[p] <= 1; b_slot[p] <= 7'(k); b1[p] <= bv(p, k); b2[p] <= bv(p, (k == 0) ? 128 : 256 - k);
      end
      @(posedge clk);
    end
    for (int p = 0; p < NUM_PIPES; p++) b_valid[p] <= 0;
    repeat (4300) @(posedge clk);
    // raw mode: capture at the start of the period after sync
    mode <= MODE_RAW;
    sync <= 1; @(posedge clk); sync <= 0;
    for (int k = 0; k < 100; k++) begin
      for (int p = 0; p < NUM_PIPES; p++) for (int i = 0; i < SPC; i++) adc[p][i] <= adc_t'(rv(p, 4 * k + i));
      @(posedge clk);
    end
    repeat (1100) @(posedge clk);
    checks++; if (nrec[0] != 3 || nrec[1] != 16 || nrec[2] != 16) begin failures++; $display("records %0d %0d %0d", nrec[0], nrec[1], nrec[2]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int nrec [3] = '{0, 0, 0};
  int widx = 0, kind = 0, pipe = 0;
  always @(posedge clk) if (!rst && gbe_valid) begin
    automatic logic [31:0] e;
    checks++;
    if (gbe_sop) begin
      kind = int'(gbe_data[19:18]); pipe = int'(gbe_data[15:12]); widx = 0;
      if (gbe_data[31:24] != 8'hE7) failures++;
    end else begin
      case (kind)
        0: e = {6'b0, chv(2*widx+1, 7, nrec[0]), 6'b0, chv(2*widx, 7, nrec[0])};
        1: e = bv(pipe, widx);
        default: e = {rv(pipe, 4*widx+3), rv(pipe, 4*widx+2), rv(pipe, 4*widx+1), rv(pipe, 4*widx)};
      endcase
      if (gbe_data != e) begin failures++; if (failures < 6) $display("kind %0d pipe %0d w %0d got %h exp %h", kind, pipe, widx, gbe_data, e); end
      widx++;
    end
    if (gbe_eop) begin
      checks++;
      if (widx != ((kind == 0) ? 8 : (kind == 1) ? 256 : 64)) failures++;
      nrec[kind]++;
    end
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
