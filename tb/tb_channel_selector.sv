// Testbench for the channel selector. Channel mode: a programmed,
// non-contiguous and unordered 24-entry table must come out in table order
// with the values of the previous frame. Burst mode: only the first frame of
// every BURST_PERIOD frames (from sync) is output, all 256 channels, in slot
// order on two lanes. Frame values encode (frame, channel) so any mix-up shows.
module tb_channel_selector;
  import mwa_pkg::*;
  localparam int BP = 4;
  logic clk = 0, rst = 1, sync = 0, tbl_wr_en = 0, in_valid = 0;
  mode_e mode = MODE_CHANNEL;
  logic [4:0] tbl_wr_idx; chan_t tbl_wr_chan;
  logic [6:0] in_slot = 0; cplx16_t in1, in2;
  logic ch_valid, b_valid; logic [4:0] ch_slot; logic [6:0] b_slot;
  cplx16_t ch_data, b1, b2;
  int checks = 0, failures = 0;
  channel_selector #(.BURST_PERIOD(BP)) dut (.*);
  always #5 clk = ~clk;
  int tbl [NUM_SEL];
  function automatic cplx16_t val(input int f, input int c);
    cplx16_t v; v.re = 16'(f * 1000 + c); v.im = 16'(-c - 7 * f); return v;
  endfunction
  int frame = 0, nch = 0, nb = 0, bframes = 0, bf = 0;
  logic [31:0] bseen;
  // producer: one frame per 128 clocks
  initial begin
    in1 = '0; in2 = '0; nch = 0; nb = 0; bframes = 0; frame = 0;
    repeat (3) @(posedge clk); rst <= 0;
    for (int i = 0; i < NUM_SEL; i++) begin
      tbl[i] = (i * 37 + 11) % 256;
      tbl_wr_en <= 1; tbl_wr_idx <= 5'(i); tbl_wr_chan <= chan_t'(tbl[i]); @(posedge clk);
    end
    tbl_wr_en <= 0;
    sync <= 1; @(posedge clk); sync <= 0;
    for (frame = 0; frame < 14; frame++) begin
      for (int k = 0; k < 128; k++) begin
        if (frame == 5 && k == 64) mode <= MODE_BURST;
        in_valid <= 1; in_slot <= 7'(k);
        in1 <= val(frame, k); in2 <= val(frame, (k == 0) ? 128 : 256 - k);
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (200) @(posedge clk);
    checks += 2;
    if (nch != 5 * NUM_SEL) begin failures++; $display("nch %0d", nch); end
    // burst frames: 5 .. 13, those with (frame % BP) == 0 -> 8, 12
    if (bframes != 2) begin failures++; $display("bframes %0d", bframes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // frame whose data is being read out = frame - 1 (read-out follows completion)
  always @(posedge clk) begin
    if (ch_valid && !rst) begin
      checks++; nch++;
      if (ch_data != val(frame - 1, tbl[ch_slot]) || ch_slot != 5'((nch - 1) % NUM_SEL)) begin
        failures++; if (failures < 5) $display("ch slot %0d frame %0d got %0d exp %0d", ch_slot, frame, ch_data.re, val(frame-1, tbl[ch_slot]).re);
      end
    end
    if (b_valid && !rst) begin
      checks++;
      if (b_slot == 0) begin bframes++; bf = frame - 1; end
      if (b1 != val(bf, b_slot) || b2 != val(bf, (b_slot == 0) ? 128 : 256 - int'(b_slot)) ||
          (bf % BP) != 0) begin
        failures++; if (failures < 5) $display("burst frame %0d slot %0d", bf, b_slot);
      end
    end
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
