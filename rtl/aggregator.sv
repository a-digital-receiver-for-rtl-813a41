// Aggregator: gathers, reorders and packetises the channel-mode sky band.
//
// Every filter-bank frame each of the 16 pipelines delivers its 24 selected
// channels as 5+5-bit values. The aggregator collects them into a frame
// buffer and, once the frame is complete, copies it to a send buffer and
// emits one packet on each of the three fibre streams; fibre f carries
// selection slots 8f..8f+7 for all 16 inputs (8 coarse channels of the 8
// dual-polarised tiles). The three packets go out in parallel, one 16-bit
// word per clock, and are finished well before the next frame is complete
// (87 of 128 clocks, 1.74 Gb/s, inside the 2.0 Gb/s payload rate of a
// 2.5 Gb/s 8b/10b link).
//
// Packet layout (16-bit words; the source description gives only the field
// list: packet identification, receiver, fibre, time-stamp, sequence number,
// checksum, data; the layout below is this design's choice):
//   0      0x4D57 packet marker
//   1      {node_id[7:0], 6'b0, fibre[1:0]}
//   2      seconds since start, from the 1 s synchronising pulses [15:0]
//   3      {11'b0, frame-in-second[20:16]}
//   4      frame-in-second[15:0] (1.28 million frames per second)
//   5      packet sequence number of this fibre [15:0]
//   6..85  payload: 128 samples of 10 bits, sample s = 16*c + p is slot
//          8f+c of input p as {re[4:0], im[4:0]} at payload bits 10s+9..10s,
//          word 6+k holds payload bits 16k+15..16k (channel-major reordering,
//          all inputs of one channel adjacent, for the correlator)
//   86     checksum: sum of words 0..85 modulo 2^16
// All pipelines run in lock step; the frame is taken as complete when input
// 0 delivers its slot 23.
module aggregator
  import mwa_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        sync,
  input  logic [7:0]  node_id,
  input  logic        in_valid [NUM_PIPES],
  input  logic [4:0]  in_slot  [NUM_PIPES],
  input  cplx5_t      in_data  [NUM_PIPES],
  output logic [FIBER_W-1:0] fib_data  [NUM_FIBERS],
  output logic        fib_valid [NUM_FIBERS],
  output logic        fib_sop   [NUM_FIBERS],
  output logic        fib_eop   [NUM_FIBERS]
);
  localparam int HDR    = 6;
  localparam int PAYW   = NUM_PIPES * CH_PER_FIBER * 2 * QUANT_W / FIBER_W;  // 80
  localparam int PKTW   = HDR + PAYW + 1;                                   // 87
  localparam int PBITS  = PAYW * FIBER_W;                                   // 1280
  localparam logic [15:0] MARKER = 16'h4D57;

  cplx5_t cur [NUM_PIPES][NUM_SEL];
  cplx5_t snd [NUM_PIPES][NUM_SEL];
  logic   frame_rdy;
  logic   sending;
  logic [6:0] widx;
  logic [15:0] secs;
  logic [20:0] fr_in_sec, fr_stamp;
  logic [15:0] seq;
  logic [15:0] csum [NUM_FIBERS];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NUM_PIPES; p++)
      if (in_valid[p] && in_slot[p] < 5'(NUM_SEL)) cur[p][in_slot[p]] <= in_data[p];
  end

  // Payload bit vectors of the three fibres, built from the send buffer.
  logic [PBITS-1:0] payload [NUM_FIBERS];
  always_comb begin
    for (int f = 0; f < NUM_FIBERS; f++)
      for (int c = 0; c < CH_PER_FIBER; c++)
        for (int p = 0; p < NUM_PIPES; p++)
          payload[f][10*(NUM_PIPES*c + p) +: 10] = {snd[p][CH_PER_FIBER*f + c].re, snd[p][CH_PER_FIBER*f + c].im};
  end

  function automatic logic [15:0] word_at(input int f, input logic [6:0] i);
    case (i)
      7'd0: return MARKER;
      7'd1: return {node_id, 6'b0, 2'(f)};
      7'd2: return secs;
      7'd3: return {11'b0, fr_stamp[20:16]};
      7'd4: return fr_stamp[15:0];
      7'd5: return seq;
      default: return payload[f][FIBER_W * (int'(i) - HDR) +: FIBER_W];
    endcase
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      frame_rdy <= 1'b0;
      sending   <= 1'b0;
      widx      <= '0;
      secs      <= '0;
      fr_in_sec <= '0;
      fr_stamp  <= '0;
      seq       <= '0;
      for (int f = 0; f < NUM_FIBERS; f++) begin
        fib_data[f]  <= '0;
        fib_valid[f] <= 1'b0;
        fib_sop[f]   <= 1'b0;
        fib_eop[f]   <= 1'b0;
        csum[f]      <= '0;
      end
    end else begin
      frame_rdy <= in_valid[0] && in_slot[0] == 5'(NUM_SEL - 1);
      if (sync) begin
        secs      <= secs + 16'd1;
        fr_in_sec <= '0;
      end
      if (frame_rdy) begin
        snd       <= cur;
        sending   <= 1'b1;
        widx      <= '0;
        fr_stamp  <= fr_in_sec;
        if (!sync) fr_in_sec <= fr_in_sec + 21'd1;
      end
      for (int f = 0; f < NUM_FIBERS; f++) begin
        fib_valid[f] <= 1'b0;
        fib_sop[f]   <= 1'b0;
        fib_eop[f]   <= 1'b0;
      end
      if (sending && !frame_rdy) begin
        for (int f = 0; f < NUM_FIBERS; f++) begin
          automatic logic [15:0] w = (widx == 7'(PKTW - 1)) ? csum[f] : word_at(f, widx);
          fib_data[f]  <= w;
          fib_valid[f] <= 1'b1;
          fib_sop[f]   <= (widx == 7'd0);
          fib_eop[f]   <= (widx == 7'(PKTW - 1));
          csum[f]      <= (widx == 7'd0) ? w : csum[f] + w;
        end
        widx <= widx + 7'd1;
        if (widx == 7'(PKTW - 1)) begin
          sending <= 1'b0;
          seq     <= seq + 16'd1;
        end
      end
    end
  end
endmodule
