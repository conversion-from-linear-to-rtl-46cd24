// polconv_pkg: sizes and number formats shared by the linear-to-circular
// polarization converter.
//
// The spectral sizes follow the design description: a 1024-sample frame per
// FFT (512 useful channels of 1 MHz at 1024 MS/s), eight parallel FFT lanes
// clocked at 128 MHz, 10-bit unsigned samples, an 11-bit two's complement FFT
// input and a 51-bit output power per channel. Everything else here (the FFT
// output width, the fixed-point formats of the gains and of cos/sin, the
// equalized sample width) is this design's own choice and is marked as such.
package polconv_pkg;

  // ---- sizes given by the design description ----
  localparam int unsigned LANES     = 8;     // parallel samples per clock = FFT engines
  localparam int unsigned NFFT      = 1024;  // samples per frame
  localparam int unsigned NCH       = NFFT / 2; // spectral channels kept
  localparam int unsigned SAMP_W    = 10;    // ADC sample, unsigned
  localparam int unsigned FFT_IN_W  = 11;    // FFT input, two's complement
  localparam int unsigned PWR_W     = 51;    // output power per channel
  localparam int unsigned INT_LOG2  = 20;    // 2^20 frames per lane = 8.39 s

  // ---- this design's own choices ----
  // Unscaled fixed-point FFT output: input width + log2(NFFT) + 1.
  localparam int unsigned FFT_OUT_W = FFT_IN_W + $clog2(NFFT) + 1;   // 22
  // Decoded X and Y components keep the FFT output width.
  localparam int unsigned SPEC_W    = FFT_OUT_W;
  // One product (|X|^2, Zr, ...) and its accumulation over 2^INT_LOG2 frames.
  localparam int unsigned PROD_W    = 2 * SPEC_W + 1;                // 45
  localparam int unsigned ACC_W     = PROD_W + INT_LOG2;             // 65
  // Sum over the lanes of (on - off).
  localparam int unsigned SUM_W     = ACC_W + $clog2(LANES) + 1;     // 69
  // Gain: unsigned, GAIN_F fractional bits (range below 2^(GAIN_W-GAIN_F)).
  localparam int unsigned GAIN_W    = 18;
  localparam int unsigned GAIN_F    = 12;
  // cos/sin: signed, ROT_F fractional bits (1.0 = 2^ROT_F).
  localparam int unsigned ROT_W     = 18;
  localparam int unsigned ROT_F     = 16;
  // Equalized X', Y'' components and the circular voltages.
  localparam int unsigned EQ_W      = 24;
  localparam int unsigned V_W       = EQ_W + 1;
  // Mantissa width used when |Z| is normalised before the square root.
  localparam int unsigned NORM_W    = 32;

  localparam int unsigned CH_W      = $clog2(NCH);   // channel index width
  localparam int unsigned BIN_W     = $clog2(NFFT);  // FFT bin index width

  // Weights of one channel as read from the latches.
  typedef struct packed {
    logic [GAIN_W-1:0]        gxw;   // Gx * W
    logic [GAIN_W-1:0]        gyw;   // Gy * W
    logic signed [ROT_W-1:0]  cosw;  // cos(theta) * W
    logic signed [ROT_W-1:0]  sinw;  // sin(theta) * W
  } weights_t;

  // Operating mode of the converter.
  typedef enum logic [1:0] {
    MODE_IDLE    = 2'd0,
    MODE_ACCUM   = 2'd1,   // calibration spectra being accumulated
    MODE_COMPUTE = 2'd2,   // equalizer weights being computed
    MODE_OBSERVE = 2'd3    // weights latched, equalizer running
  } mode_t;

endpackage
