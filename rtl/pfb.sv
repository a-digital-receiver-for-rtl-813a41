// Critically sampled polyphase filter bank (PFB) for one signal pipeline.
//
// The 655.36 MS/s real input (four 9-bit samples per 163.84 MHz clock) is
// split into 256 coarse channels of 1.28 MHz. Structure, as in the source
// description: a prototype low-pass filter of 8 taps x 512 = 4096 coefficients
// (a Kaiser-windowed sinc, 12-bit coefficients) is applied as 512 component
// FIRs of 8 taps, one per FFT input, and the 512 FIR outputs of every frame go
// through a 512-point FFT with 12-bit twiddle factors. A frame is 512 samples
// = 128 clocks = 781.25 ns. Of the 512 FFT bins of the real input the 256
// non-redundant ones (DC to channel 255) are kept and delivered as 16+16-bit
// complex values on two simultaneous output sequences:
//   slot k, output 1: channel k        (0, 1, 2, ..., 127)
//   slot k, output 2: channel 256-k    (128, 255, 254, ..., 129; slot 0 -> 128)
// The mapping is the one shown in the published output timing diagram.
//
// The original filter bank is a third-party netlist whose internals are not
// published, so everything below the interface is this design's own:
//  * Coefficients h[n] = kaiser(n; BETA) * sinc((n - 2047.5) / 512), n =
//    0..4095, scaled so the peak is 2047, computed at elaboration.
//  * FIR: y[b] = sum_{t=0..7} h[512 t + b] * x_{m-7+t}[b], where x_m[b] is
//    sample b of frame m; the sample history is a circular 8-frame memory.
//  * FFT: an in-place radix-2 decimation-in-time complex FFT of the real FIR
//    output (imaginary part zero), BPC butterflies per clock, 9 stages, no
//    scaling inside (36-bit words), twiddles round(2047 cos/sin) with a
//    divide by 2^11; the result is divided by 2^OUT_SHIFT with rounding and
//    saturated to 16 bits.
//
// Timing: frames are aligned to the synchronising pulse (sample 0 of a frame
// is the first clock after sync). The outputs of a frame appear as 128
// consecutive clocks with out_valid, out_sof on slot 0, starting
// 2 + 9*256/BPC + 1 clocks after the frame's last input (75 for BPC = 32), so
// one frame leaves every 128 clocks, keeping pace with the ADC.
module pfb
  import mwa_pkg::*;
#(
  parameter int unsigned BPC       = 32,   // butterflies per clock
  parameter int unsigned OUT_SHIFT = 11,
  parameter real         BETA      = 6.0
) (
  input  logic    clk,
  input  logic    rst,
  input  logic    sync,
  input  pfbin_t  din [SPC],
  output logic    out_valid,
  output logic    out_sof,
  output logic [6:0] out_slot,
  output cplx16_t out1,
  output cplx16_t out2
);
  localparam int L      = PFB_TAPS * FFT_N;        // 4096
  localparam int YW     = 24;                      // FIR output width
  localparam int FW     = 36;                      // FFT word width
  localparam int STAGES = $clog2(FFT_N);           // 9
  localparam int BCLKS  = (FFT_N / 2) / BPC;       // clocks per stage
  localparam real PI    = 3.14159265358979323846;

  typedef logic signed [COEF_W-1:0] coef_t;
  typedef coef_t tap_t [FFT_N];
  typedef coef_t tw_t [FFT_N/2];
  typedef logic signed [FW-1:0] fw_t;

  // ---------------------------------------------------------------- tables
  function automatic real bessel_i0(input real x);
    real s, term;
    s = 1.0; term = 1.0;
    for (int k = 1; k < 14; k++) begin
      term = term * (x / (2.0 * k)) * (x / (2.0 * k));
      s = s + term;
    end
    return s;
  endfunction

  function automatic coef_t q12(input real v);
    return coef_t'($rtoi(v < 0.0 ? v - 0.5 : v + 0.5));
  endfunction

  // One 512-coefficient tap (branch coefficients 512*tap .. 512*tap+511) per
  // call, so each table is a separate, short constant evaluation.
  localparam real I0_BETA = bessel_i0(BETA);

  function automatic tap_t make_tap(input int tap);
    tap_t r;
    real c, a, w, s, u;
    c = (L - 1) / 2.0;
    for (int b = 0; b < FFT_N; b++) begin
      automatic int n = tap * FFT_N + b;
      a = (n - c) / c;
      w = bessel_i0(BETA * $sqrt(1.0 - a * a)) / I0_BETA;
      u = (n - c) / real'(FFT_N);
      s = $sin(PI * u) / (PI * u);
      r[b] = q12(2047.0 * w * s);
    end
    return r;
  endfunction

  function automatic tw_t make_cos();
    tw_t r;
    for (int k = 0; k < FFT_N / 2; k++) r[k] = q12(2047.0 * $cos(2.0 * PI * k / FFT_N));
    return r;
  endfunction

  function automatic tw_t make_msin();   // -sin: W = exp(-j 2 pi k / N)
    tw_t r;
    for (int k = 0; k < FFT_N / 2; k++) r[k] = q12(-2047.0 * $sin(2.0 * PI * k / FFT_N));
    return r;
  endfunction

  localparam tap_t H0 = make_tap(0);
  localparam tap_t H1 = make_tap(1);
  localparam tap_t H2 = make_tap(2);
  localparam tap_t H3 = make_tap(3);
  localparam tap_t H4 = make_tap(4);
  localparam tap_t H5 = make_tap(5);
  localparam tap_t H6 = make_tap(6);
  localparam tap_t H7 = make_tap(7);

  function automatic coef_t coef(input int tap, input int b);
    case (tap)
      0: return H0[b];
      1: return H1[b];
      2: return H2[b];
      3: return H3[b];
      4: return H4[b];
      5: return H5[b];
      6: return H6[b];
      default: return H7[b];
    endcase
  endfunction
  localparam tw_t TWC  = make_cos();
  localparam tw_t TWS  = make_msin();

  // ---------------------------------------------------------------- FIR
  pfbin_t hist [PFB_TAPS][FFT_N];        // circular frame history
  logic [2:0] wp;                         // frame slot being written
  logic [2:0] nfill;                      // history frames written since reset
  logic [6:0] icnt;                       // input clock within frame
  logic signed [YW-1:0] ybuf [FFT_N];
  logic frame_done;

  always_ff @(posedge clk) begin
    if (rst) begin
      wp         <= '0;
      icnt       <= '0;
      frame_done <= 1'b0;
      nfill      <= '0;
    end else begin
      frame_done <= 1'b0;
      if (sync) begin
        icnt <= '0;
      end else begin
        for (int i = 0; i < SPC; i++) begin
          automatic int b = SPC * int'(icnt) + i;
          automatic logic signed [YW-1:0] acc = YW'(coef(PFB_TAPS - 1, b) * din[i]);
          for (int k = 1; k < PFB_TAPS; k++)
            if (k <= int'(nfill))
              acc += YW'(coef(PFB_TAPS - 1 - k, b) * hist[3'(wp - 3'(k))][b]);
          ybuf[b] <= acc;
          hist[wp][b] <= din[i];
        end
        icnt <= icnt + 7'd1;
        if (icnt == 7'd127) begin
          wp         <= wp + 3'd1;
          frame_done <= 1'b1;
          if (nfill != 3'd7) nfill <= nfill + 3'd1;
        end
      end
    end
  end

  // ---------------------------------------------------------------- FFT
  fw_t are [FFT_N];
  fw_t aim [FFT_N];
  logic       running;
  logic [3:0] stage;
  logic [$clog2(BCLKS+1)-1:0] bcnt;
  logic       fft_done;

  function automatic logic [8:0] bitrev9(input logic [8:0] v);
    return {<<{v}};
  endfunction

  function automatic fw_t twmul(input fw_t a, input coef_t w);
    logic signed [FW+COEF_W-1:0] p;
    p = (FW+COEF_W)'(a) * (FW+COEF_W)'(w);
    return FW'((p + (FW+COEF_W)'(1 << 10)) >>> 11);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      running  <= 1'b0;
      stage    <= '0;
      bcnt     <= '0;
      fft_done <= 1'b0;
    end else begin
      fft_done <= 1'b0;
      if (frame_done) begin
        for (int n = 0; n < FFT_N; n++) begin
          are[bitrev9(9'(n))] <= FW'(ybuf[n]);
          aim[n]              <= '0;
        end
        running <= 1'b1;
        stage   <= '0;
        bcnt    <= '0;
      end else if (running) begin
        for (int u = 0; u < BPC; u++) begin
          automatic int j    = int'(bcnt) * BPC + u;
          automatic int half = 1 << stage;
          automatic int pos  = j & (half - 1);
          automatic int i0   = ((j >> stage) << (stage + 1)) | pos;
          automatic int i1   = i0 + half;
          automatic int k    = pos << (STAGES - 1 - int'(stage));
          automatic fw_t tr  = twmul(are[i1], TWC[k]) - twmul(aim[i1], TWS[k]);
          automatic fw_t ti  = twmul(are[i1], TWS[k]) + twmul(aim[i1], TWC[k]);
          are[i0] <= are[i0] + tr;
          aim[i0] <= aim[i0] + ti;
          are[i1] <= are[i0] - tr;
          aim[i1] <= aim[i0] - ti;
        end
        if (bcnt == ($bits(bcnt))'(BCLKS - 1)) begin
          bcnt <= '0;
          if (stage == 4'(STAGES - 1)) begin
            running  <= 1'b0;
            fft_done <= 1'b1;
          end
          stage <= stage + 4'd1;
        end else begin
          bcnt <= bcnt + 1'b1;
        end
      end
    end
  end

  // ---------------------------------------------------------------- output
  function automatic logic signed [PFB_OUT_W-1:0] oscale(input fw_t v);
    fw_t r;
    r = (v + (fw_t'(1) <<< (OUT_SHIFT - 1))) >>> OUT_SHIFT;
    if (r >  fw_t'(32767))  r = fw_t'(32767);
    if (r < -fw_t'(32768))  r = -fw_t'(32768);
    return PFB_OUT_W'(r);
  endfunction

  cplx16_t obuf [NUM_CH];
  logic    streaming;
  logic [6:0] ocnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      streaming <= 1'b0;
      ocnt      <= '0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_slot  <= '0;
      out1      <= '0;
      out2      <= '0;
    end else begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      if (streaming) begin
        out_valid <= 1'b1;
        out_sof   <= (ocnt == 7'd0);
        out_slot  <= ocnt;
        out1      <= obuf[chan_t'(ocnt)];
        out2      <= obuf[out2_chan(ocnt)];
        ocnt      <= ocnt + 7'd1;
        if (ocnt == 7'd127) streaming <= 1'b0;
      end
      // A new frame's result arrives in the clock that sends slot 127 of the
      // previous one; that read still sees the old buffer contents.
      if (fft_done) begin
        for (int c = 0; c < NUM_CH; c++) begin
          obuf[c].re <= oscale(are[c]);
          obuf[c].im <= oscale(aim[c]);
        end
        streaming <= 1'b1;
        ocnt      <= '0;
      end
    end
  end
endmodule
