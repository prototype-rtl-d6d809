// kws_pkg: constants shared by the keyword-spotting accelerator.
//
// The accelerator turns a 16-bit audio stream into MFCC feature vectors
// (feature extraction unit, FEU) and compares the sequence of vectors with
// stored keyword templates (template classification unit, TCU). The 128-point
// FFT is the figure given for the design; frame shift, filter count, cepstral
// count, keyword count and template length are this design's own choices.
// Coefficient tables are read from the .hex files listed here; their formulas
// are given next to each constant.
package kws_pkg;

  // Audio samples: 16-bit two's complement.
  localparam int unsigned SAMPLE_W  = 16;
  // FFT size (given) and frame shift (own choice: half a frame).
  localparam int unsigned NFFT      = 128;
  localparam int unsigned FRAME_HOP = 64;
  // Width of the complex samples inside the FFT (16-bit data plus headroom).
  localparam int unsigned FFT_W     = 18;
  // Width of the power spectrum and of the Mel filter outputs.
  localparam int unsigned POW_W     = 32;
  // Mel filter bank: NUM_MEL triangular filters over bins 0..NFFT/2.
  localparam int unsigned NUM_MEL   = 20;
  localparam int unsigned NUM_BINS  = NFFT / 2 + 1;
  // Log output: 32 - leading zeros of a 32-bit value, 0..32.
  localparam int unsigned LOG_W     = 6;
  // Cepstral coefficients c1..c12 as 8-bit signed values.
  localparam int unsigned NUM_MFCC  = 12;
  localparam int unsigned MFCC_W    = 8;
  // Keywords and template length: one second at 8 kHz with the frame above
  // gives (8000 - 128) / 64 + 1 = 124 frames.
  localparam int unsigned NUM_KW    = 8;
  localparam int unsigned NUM_FRAMES = 124;
  localparam int unsigned DIST_W    = 24;

  // Coefficient tables (files relative to the repository root):
  //  kws_hamming.hex  w[n] = round(32767 * (0.54 - 0.46 cos(2 pi n / 127))), n = 0..127
  //  kws_twiddle.hex  {c, d}: c = round(32767 cos(2 pi t/128)), d = round(-32767 sin(2 pi t/128)), t = 0..63
  //  kws_mel.hex      per bin b = 0..64: {boundary, w_odd[7:0], w_even[7:0]} (see kws_mel_filter)
  //  kws_dct.hex      c[k][n] = round(127 cos(pi (k+1)(n+0.5)/20)), index k*20+n, k = 0..11
  localparam string HAMMING_FILE = "rtl/kws_hamming.hex";
  localparam string TWIDDLE_FILE = "rtl/kws_twiddle.hex";
  localparam string MEL_FILE     = "rtl/kws_mel.hex";
  localparam string DCT_FILE     = "rtl/kws_dct.hex";

endpackage
