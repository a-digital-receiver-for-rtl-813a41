// Gigabit Ethernet data formatter: burst, raw and channel-monitor records.
//
// Three kinds of data leave the receiver on its Gigabit Ethernet port, as the
// source description lists them:
//  * Burst mode: once every BURST_PERIOD frames every pipeline's channel
//    selector delivers a complete 256-channel spectrum in native 16+16 bits.
//    All 16 spectra are captured and then sent as 16 records.
//  * Raw mode: once every BURST_PERIOD frames (1024 frames)
//    256 consecutive ADC samples of every input are captured (64 clocks, at
//    the start of the period counted from the synchronising pulse) and sent
//    as 16 records of 8-bit samples.
//  * Channel mode: one of the 24 sky-band channels (mon_slot) is monitored
//    continuously; each frame its 5+5-bit value for all 16 inputs is sent as
//    one record.
// The records are handed to the vendor Ethernet/UDP core as a 32-bit word
// stream with start/end markers; that core adds the UDP/IP/Ethernet headers.
// Record layout (this design's choice):
//   word 0   {8'hE7, 4'b0, kind[1:0] (0 channel monitor, 1 burst, 2 raw),
//             2'b0, input[3:0], seq[11:0]}
//   burst    256 words {re, im}, channel 0..255
//   raw      64 words, sample 4k+i in byte i (byte 0 = bits 7..0)
//   monitor  8 words, input 2k in bits 9..0 and 2k+1 in bits 25..16 as
//            {re, im}
// Records drain at one word per clock; a full burst set (16 x 257 words)
// takes 4112 clocks, far inside the 131072-clock period.
module gbe_formatter
  import mwa_pkg::*;
#(
  parameter int unsigned BURST_PERIOD = BURST_FRAMES
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        sync,
  input  mode_e       mode,
  input  logic [4:0]  mon_slot,
  // burst lanes from the channel selectors
  input  logic        b_valid [NUM_PIPES],
  input  logic [6:0]  b_slot  [NUM_PIPES],
  input  cplx16_t     b1      [NUM_PIPES],
  input  cplx16_t     b2      [NUM_PIPES],
  // raw ADC samples
  input  adc_t        adc     [NUM_PIPES][SPC],
  // requantised channel-mode streams
  input  logic        ch_valid [NUM_PIPES],
  input  logic [4:0]  ch_slot  [NUM_PIPES],
  input  cplx5_t      ch_data  [NUM_PIPES],
  output logic [31:0] gbe_data,
  output logic        gbe_valid,
  output logic        gbe_sop,
  output logic        gbe_eop
);
  localparam int PW = $clog2(BURST_PERIOD * FFT_N / SPC);
  typedef enum logic [1:0] {K_MON = 2'd0, K_BURST = 2'd1, K_RAW = 2'd2} kind_e;

  cplx16_t bcap [NUM_PIPES][NUM_CH];
  adc_t    rcap [NUM_PIPES][RAW_SAMPLES];
  cplx5_t  mcap [NUM_PIPES];
  logic [PW-1:0] pcnt;            // clock within the burst / raw period
  logic    start;
  kind_e   start_kind;
  logic    busy;
  kind_e   kind;
  logic [3:0] pipe;
  logic [8:0] idx;                // 0 = header
  logic [8:0] nwords;
  logic [11:0] seq;

  // Capture side
  always_ff @(posedge clk) begin
    for (int p = 0; p < NUM_PIPES; p++) begin
      if (b_valid[p]) begin
        bcap[p][chan_t'(b_slot[p])]     <= b1[p];
        bcap[p][out2_chan(b_slot[p])]   <= b2[p];
      end
      if (mode == MODE_RAW && pcnt < PW'(RAW_SAMPLES / SPC))
        for (int i = 0; i < SPC; i++) rcap[p][SPC * int'(pcnt) + i] <= adc[p][i];
      if (ch_valid[p] && ch_slot[p] == mon_slot) mcap[p] <= ch_data[p];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pcnt       <= '0;
      start      <= 1'b0;
      start_kind <= K_MON;
    end else begin
      pcnt  <= (sync || pcnt == PW'(BURST_PERIOD * FFT_N / SPC - 1)) ? '0 : pcnt + PW'(1);
      start <= 1'b0;
      if (mode == MODE_BURST && b_valid[0] && b_slot[0] == 7'd127) begin
        start <= 1'b1; start_kind <= K_BURST;
      end else if (mode == MODE_RAW && pcnt == PW'(RAW_SAMPLES / SPC - 1)) begin
        start <= 1'b1; start_kind <= K_RAW;
      end else if (mode == MODE_CHANNEL && ch_valid[0] && ch_slot[0] == 5'(NUM_SEL - 1)) begin
        start <= 1'b1; start_kind <= K_MON;
      end
    end
  end

  // Drain side
  function automatic logic [31:0] data_word(input kind_e k, input logic [3:0] p, input logic [8:0] i);
    automatic int j = int'(i) - 1;
    case (k)
      K_BURST: return bcap[p][chan_t'(j)];
      K_RAW:   return {rcap[p][4*(j%64)+3], rcap[p][4*(j%64)+2], rcap[p][4*(j%64)+1], rcap[p][4*(j%64)]};
      default: return {6'b0, mcap[4'(2*(j%8)+1)], 6'b0, mcap[4'(2*(j%8))]};
    endcase
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      busy      <= 1'b0;
      kind      <= K_MON;
      pipe      <= '0;
      idx       <= '0;
      nwords    <= '0;
      seq       <= '0;
      gbe_data  <= '0;
      gbe_valid <= 1'b0;
      gbe_sop   <= 1'b0;
      gbe_eop   <= 1'b0;
    end else begin
      gbe_valid <= 1'b0;
      gbe_sop   <= 1'b0;
      gbe_eop   <= 1'b0;
      if (start && !busy) begin
        busy   <= 1'b1;
        kind   <= start_kind;
        pipe   <= '0;
        idx    <= '0;
        nwords <= (start_kind == K_BURST) ? 9'(NUM_CH) :
                  (start_kind == K_RAW)   ? 9'(RAW_SAMPLES / 4) : 9'(NUM_PIPES / 2);
      end else if (busy) begin
        gbe_valid <= 1'b1;
        gbe_sop   <= (idx == 0);
        gbe_eop   <= (idx == nwords);
        gbe_data  <= (idx == 0) ? {8'hE7, 4'b0, kind, 2'b0, pipe, seq} : data_word(kind, pipe, idx);
        if (idx == nwords) begin
          idx <= '0;
          seq <= seq + 12'd1;
          if (kind == K_MON || pipe == 4'(NUM_PIPES - 1)) busy <= 1'b0;
          else pipe <= pipe + 4'd1;
        end else begin
          idx <= idx + 9'd1;
        end
      end
    end
  end
endmodule
