// kws_feu: feature extraction unit, audio samples in, MFCC vectors out.
//
// A chain of valid/ready stages:
//   framing (N-sample frames every HOP samples) -> pre-emphasis ->
//   Hamming window -> N-point FFT -> power spectrum -> Mel filter bank ->
//   log2 -> framing (regroups the NUM_MEL log values of a frame) -> DCT.
// Every stage accepts one value per cycle except the DCT, which needs
// NUM_MFCC + 1 cycles per log value; the second framing buffer absorbs the
// Mel bank's burst so the spectrum stages do not wait for it.
//
// Interface: 16-bit signed samples in (valid/ready), NUM_MFCC signed 8-bit
// cepstra per frame out (valid/ready). clr empties all stages.
// Timing: see the stage modules; a frame's last cepstrum leaves a few hundred
// cycles after its last sample has been read from the frame buffer.
//
// The order of the stages is that of the accelerator's block diagram; all
// sizes other than N = 128 are this design's choices (see kws_pkg).
module kws_feu
  import kws_pkg::*;
#(
  parameter int unsigned N   = NFFT,
  parameter int unsigned HOP = FRAME_HOP
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr,
  input  logic                       in_valid,
  input  logic signed [SAMPLE_W-1:0] in_data,
  output logic                       in_ready,
  output logic                       out_valid,
  output logic signed [MFCC_W-1:0]   out_data,
  input  logic                       out_ready
);
  logic                       fr_v, fr_r;   logic signed [SAMPLE_W-1:0] fr_d;
  logic                       pe_v, pe_r;   logic signed [SAMPLE_W-1:0] pe_d;
  logic                       wi_v, wi_r;   logic signed [SAMPLE_W-1:0] wi_d;
  logic                       ff_v, ff_r;   logic signed [FFT_W-1:0]    ff_re, ff_im;
  logic                       ps_v, ps_r;   logic [POW_W-1:0]           ps_d;
  logic                       me_v, me_r;   logic [POW_W-1:0]           me_d;
  logic                       lg_v, lg_r;   logic [LOG_W-1:0]           lg_d;
  logic                       f2_v, f2_r;   logic [LOG_W-1:0]           f2_d;

  kws_framing #(.W(SAMPLE_W), .FRAME(N), .HOP(HOP), .DEPTH(2 * N)) u_framing (
    .clk, .rst_n, .clr, .in_valid, .in_data(in_data), .in_ready,
    .out_valid(fr_v), .out_data(fr_d), .out_ready(fr_r));

  kws_preemphasis #(.W(SAMPLE_W), .FRAME(N)) u_preemphasis (
    .clk, .rst_n, .clr, .in_valid(fr_v), .in_data(fr_d), .in_ready(fr_r),
    .out_valid(pe_v), .out_data(pe_d), .out_ready(pe_r));

  kws_windowing #(.W(SAMPLE_W), .FRAME(N)) u_windowing (
    .clk, .rst_n, .clr, .in_valid(pe_v), .in_data(pe_d), .in_ready(pe_r),
    .out_valid(wi_v), .out_data(wi_d), .out_ready(wi_r));

  kws_fft #(.W_IN(SAMPLE_W), .W(FFT_W), .N(N)) u_fft (
    .clk, .rst_n, .clr, .in_valid(wi_v), .in_data(wi_d), .in_ready(wi_r),
    .out_valid(ff_v), .out_re(ff_re), .out_im(ff_im), .out_ready(ff_r));

  kws_power_spectrum #(.W(FFT_W), .POW_W(POW_W)) u_power (
    .clk, .rst_n, .clr, .in_valid(ff_v), .in_re(ff_re), .in_im(ff_im), .in_ready(ff_r),
    .out_valid(ps_v), .out_data(ps_d), .out_ready(ps_r));

  kws_mel_filter #(.W(POW_W), .N(N), .NUM_BINS(N / 2 + 1), .NUM_MEL(NUM_MEL)) u_mel (
    .clk, .rst_n, .clr, .in_valid(ps_v), .in_data(ps_d), .in_ready(ps_r),
    .out_valid(me_v), .out_data(me_d), .out_ready(me_r));

  kws_log u_log (
    .clk, .rst_n, .clr, .in_valid(me_v), .in_data(me_d), .in_ready(me_r),
    .out_valid(lg_v), .out_data(lg_d), .out_ready(lg_r));

  kws_framing #(.W(LOG_W), .FRAME(NUM_MEL), .HOP(NUM_MEL), .DEPTH(32)) u_framing_mel (
    .clk, .rst_n, .clr, .in_valid(lg_v), .in_data(lg_d), .in_ready(lg_r),
    .out_valid(f2_v), .out_data(f2_d), .out_ready(f2_r));

  kws_dct #(.X_W(LOG_W), .Y_W(MFCC_W), .M(NUM_MEL), .K(NUM_MFCC)) u_dct (
    .clk, .rst_n, .clr, .in_valid(f2_v), .in_data(f2_d), .in_ready(f2_r),
    .out_valid, .out_data, .out_ready);

endmodule
