// kws_accel: keyword-spotting accelerator, the coprocessor of the audio SoC.
//
// The processor writes keyword templates once, then, for each utterance,
// clears the accelerator and writes one second of 8 kHz audio sample by sample
// over the AHB-Lite port. The feature extraction unit (FEU) turns the samples
// into 12 cepstral coefficients per 128-sample frame (64-sample shift); the
// template classification unit (TCU) accumulates, for every keyword, the
// distance between the input frames and the template frames along the fixed
// diagonal and, after 124 frames, names the nearest keyword and raises the
// interrupt. The processor then reads the result and the distances.
//
// Interface: AHB-Lite slave (see kws_host_if for the register map) and an
// interrupt output. One clock for the bus and the accelerator.
// Timing: one sample per bus write; the SAMPLE write waits only when the
// 256-sample frame buffer is full.
//
// The split into host interface, FEU and TCU is the paper's; the register
// map, the single clock and all sizes other than the 128-point FFT are this
// design's choices.
module kws_accel
  import kws_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        hsel,
  input  logic [31:0] haddr,
  input  logic [1:0]  htrans,
  input  logic        hwrite,
  input  logic [31:0] hwdata,
  input  logic        hready,
  output logic        hreadyout,
  output logic [31:0] hrdata,
  output logic        hresp,
  output logic        irq
);
  logic                           clr;
  logic                           smp_valid, smp_ready;
  logic [15:0]                    smp_data;
  logic                           tpl_we;
  logic [$clog2(NUM_KW)-1:0]      tpl_kw;
  logic [$clog2(NUM_FRAMES)-1:0]  tpl_frame;
  logic [$clog2(NUM_MFCC)-1:0]    tpl_coef;
  logic [7:0]                     tpl_data;
  logic                           done;
  logic [$clog2(NUM_KW)-1:0]      best_kw;
  logic [DIST_W-1:0]              best_dist;
  logic [NUM_KW-1:0][DIST_W-1:0]  distances;
  logic [$clog2(NUM_FRAMES+1)-1:0] frames;
  logic                           mf_valid, mf_ready;
  logic signed [MFCC_W-1:0]       mf_data;

  kws_host_if #(.K(NUM_KW), .T(NUM_FRAMES), .C(NUM_MFCC), .DIST_W(DIST_W)) u_host_if (
    .clk, .rst_n, .hsel, .haddr, .htrans, .hwrite, .hwdata, .hready,
    .hreadyout, .hrdata, .hresp, .irq,
    .clr, .smp_valid, .smp_data, .smp_ready,
    .tpl_we, .tpl_kw, .tpl_frame, .tpl_coef, .tpl_data,
    .done, .best_kw, .best_dist, .distances, .frames);

  kws_feu u_feu (
    .clk, .rst_n, .clr,
    .in_valid(smp_valid), .in_data(smp_data), .in_ready(smp_ready),
    .out_valid(mf_valid), .out_data(mf_data), .out_ready(mf_ready));

  kws_tcu #(.X_W(MFCC_W), .C(NUM_MFCC), .T(NUM_FRAMES), .K(NUM_KW), .DIST_W(DIST_W)) u_tcu (
    .clk, .rst_n, .clr,
    .in_valid(mf_valid), .in_data(mf_data), .in_ready(mf_ready),
    .tpl_we, .tpl_kw, .tpl_frame, .tpl_coef, .tpl_data,
    .done, .best_kw, .best_dist, .distances, .frames);

endmodule
