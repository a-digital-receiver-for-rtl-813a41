// Shared constants and types of the MWA digital receiver.
//
// The numbers here are the receiver's defining sizes: 16 signal pipelines
// (8 dual-polarised tiles), 8-bit ADC samples arriving four per 163.84 MHz
// processing clock (655.36 MS/s), a 512-point polyphase filter bank giving 256
// coarse channels of 1.28 MHz as 16+16-bit complex numbers, one filter-bank
// frame every 128 processing clocks (781.25 ns), 24 channels requantised to
// 5+5 bits for the correlator and carried on 3 fibres, burst captures every
// 1024 frames. Widths the source description does not give (gain word, register
// bus, accumulators) are choices of this implementation and are marked so.
package mwa_pkg;

  localparam int NUM_TILES       = 8;
  localparam int NUM_PIPES       = 2 * NUM_TILES;   // 16 inputs (two polarisations)
  localparam int SPC             = 4;               // samples per processing clock
  localparam int ADC_W           = 8;
  localparam int PFB_IN_W        = 9;               // sign-extended after Walsh
  localparam int FFT_N           = 512;
  localparam int NUM_CH          = 256;             // coarse channels incl. DC
  localparam int PFB_TAPS        = 8;
  localparam int COEF_W          = 12;
  localparam int PFB_OUT_W       = 16;
  localparam int FRAME_CLKS      = FFT_N / SPC;     // 128 clocks per frame
  localparam int NUM_SEL         = 24;              // channels in the sky band
  localparam int NUM_FIBERS      = 3;
  localparam int CH_PER_FIBER    = NUM_SEL / NUM_FIBERS;
  localparam int QUANT_W         = 5;
  localparam int BURST_FRAMES    = 1024;            // burst / raw period
  localparam int RAW_SAMPLES     = 256;             // raw-mode samples per ADC
  localparam int WALSH_STATES    = 16;
  localparam int WALSH_STATE_CLKS = 100 * 4096 / SPC; // 625 us = 102400 clocks
  localparam int CLKS_PER_SEC    = 163_840_000;

  // Own choices (not given in the source description).
  localparam int GAIN_W          = 16;              // unsigned gain word
  localparam int GAIN_FRAC       = 12;              // 1.0 = 4096, covers -72..+24 dB
  localparam int QUANT_SHIFT     = 8;               // fixed requantiser window
  localparam int FIBER_W         = 16;              // fibre packet word

  typedef logic signed [ADC_W-1:0]     adc_t;
  typedef logic signed [PFB_IN_W-1:0]  pfbin_t;
  typedef logic [$clog2(NUM_CH)-1:0]   chan_t;

  typedef struct packed {
    logic signed [PFB_OUT_W-1:0] re;
    logic signed [PFB_OUT_W-1:0] im;
  } cplx16_t;

  typedef struct packed {
    logic signed [QUANT_W-1:0] re;
    logic signed [QUANT_W-1:0] im;
  } cplx5_t;

  typedef enum logic [1:0] {
    MODE_CHANNEL = 2'd0,
    MODE_BURST   = 2'd1,
    MODE_RAW     = 2'd2
  } mode_e;

  // Test-pattern injection points of the diagnostic mode.
  typedef struct packed {
    logic fiber_in;
    logic agg_in;
    logic pfb_out;
    logic adc_out;
  } diag_t;

  // Output slot k of the PFB carries channel k on output 1 and this channel on
  // output 2 (128, 255, 254, ..., 129).
  function automatic chan_t out2_chan(input logic [6:0] slot);
    return (slot == 7'd0) ? chan_t'(128) : chan_t'(9'd256 - {2'b00, slot});
  endfunction

endpackage
