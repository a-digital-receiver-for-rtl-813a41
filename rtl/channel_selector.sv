// Channel selector: forms the 24-channel sky band, or the full-band burst.
//
// The gain-corrected spectrum of each filter-bank frame (two channels per
// clock for 128 clocks) is written into one bank of a two-bank frame buffer;
// when the frame is complete the banks swap and the finished frame is read
// out while the next one is being written.
//  * Channel mode: 24 entries are read, one per clock, in the order given by
//    the programmable selection table, so the sky band may be any 24 channels,
//    contiguous or not, in any order. Output: slot 0..23 with 16+16 data.
//  * Burst mode: once every BURST_FRAMES frames (counted from the
//    synchronising pulse) the whole 256-channel frame is read out at two
//    channels per clock, in the filter bank's own slot order, keeping the
//    native 16+16-bit values. Other frames produce nothing.
// Both behaviours are from the source description; the buffer organisation,
// the table reset value (channels 0..23) and the read-out timing are this
// design's choices.
//
// Timing: the read-out of a frame starts two clocks after its last input
// (slot 127); a burst read-out ends one clock after the following frame
// completes, which is safe because the bank it reads is latched.
module channel_selector
  import mwa_pkg::*;
#(
  parameter int unsigned BURST_PERIOD = BURST_FRAMES
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        sync,
  input  mode_e       mode,
  input  logic        tbl_wr_en,
  input  logic [4:0]  tbl_wr_idx,
  input  chan_t       tbl_wr_chan,
  input  logic        in_valid,
  input  logic [6:0]  in_slot,
  input  cplx16_t     in1,
  input  cplx16_t     in2,
  output logic        ch_valid,
  output logic [4:0]  ch_slot,
  output cplx16_t     ch_data,
  output logic        b_valid,
  output logic [6:0]  b_slot,
  output cplx16_t     b1,
  output cplx16_t     b2
);
  localparam int BW = $clog2(BURST_PERIOD);

  cplx16_t buf0 [NUM_CH];
  cplx16_t buf1 [NUM_CH];
  chan_t   sel  [NUM_SEL];
  logic    wbank;                  // bank being written
  logic    done;                   // frame just completed
  logic    rd_ch, rd_b;            // read-out in progress
  logic [6:0] rcnt;
  logic [BW-1:0] fcnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NUM_SEL; i++) sel[i] <= chan_t'(i);
    end else if (tbl_wr_en && tbl_wr_idx < 5'(NUM_SEL)) begin
      sel[tbl_wr_idx] <= tbl_wr_chan;
    end
  end

  // Frame buffer write side.
  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (wbank) begin
        buf1[chan_t'(in_slot)]      <= in1;
        buf1[out2_chan(in_slot)]    <= in2;
      end else begin
        buf0[chan_t'(in_slot)]      <= in1;
        buf0[out2_chan(in_slot)]    <= in2;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wbank <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= in_valid && (in_slot == 7'd127);
      if (in_valid && in_slot == 7'd127) wbank <= ~wbank;
    end
  end

  // Read side: rbank is latched when a frame completes, so a read-out that
  // runs into the next frame's completion still reads the right bank.
  logic rbank;
  function automatic cplx16_t rd(input chan_t c);
    return rbank ? buf1[c] : buf0[c];
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_ch    <= 1'b0;
      rd_b     <= 1'b0;
      rbank    <= 1'b0;
      rcnt     <= '0;
      fcnt     <= '0;
      ch_valid <= 1'b0;
      b_valid  <= 1'b0;
      ch_slot  <= '0;
      b_slot   <= '0;
      ch_data  <= '0;
      b1       <= '0;
      b2       <= '0;
    end else begin
      ch_valid <= 1'b0;
      b_valid  <= 1'b0;
      if (sync) fcnt <= '0;
      if (rd_ch) begin
        ch_valid <= 1'b1;
        ch_slot  <= rcnt[4:0];
        ch_data  <= rd(sel[rcnt[4:0]]);
        rcnt     <= rcnt + 7'd1;
        if (rcnt == 7'(NUM_SEL - 1)) rd_ch <= 1'b0;
      end else if (rd_b) begin
        b_valid <= 1'b1;
        b_slot  <= rcnt;
        b1      <= rd(chan_t'(rcnt));
        b2      <= rd(out2_chan(rcnt));
        rcnt    <= rcnt + 7'd1;
        if (rcnt == 7'd127) rd_b <= 1'b0;
      end
      // A burst read-out ends in the clock the next frame completes; the
      // last read still uses the old bank, then the new frame takes over.
      if (done) begin
        rbank <= ~wbank;
        rcnt  <= '0;
        rd_ch <= (mode == MODE_CHANNEL);
        rd_b  <= (mode == MODE_BURST) && (fcnt == '0);
        if (!sync) fcnt <= (fcnt == BW'(BURST_PERIOD - 1)) ? '0 : fcnt + BW'(1);
      end
    end
  end
endmodule
