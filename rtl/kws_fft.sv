// kws_fft: N-point FFT of a real frame as a pipeline of log2(N) stages.
//
// For N = 128 the seven radix-2 decimation-in-frequency stages are five
// general stages with a twiddle multiplier, one quarter stage (twiddles 1 and
// -i only) and one last stage (no twiddle), followed by the data-reverse
// result cache that turns the bit-reversed stage output into natural bin
// order. Each stage halves its values, so the output is X[k] / N where
// X[k] = sum_n x[n] exp(-2 pi i n k / N).
//
// Interface: real W_IN-bit samples in (valid/ready), complex W-bit bins out
// (valid/ready), bins 0..N-1 in order. clr aborts the frames in flight.
// Timing: one sample per cycle; each stage starts after half of its span has
// arrived, the result cache waits for each bin's entry, so a frame's first
// bin leaves about N + log2(N) cycles after its first sample.
//
// Stage count, the stage kinds and the result cache follow the block
// diagram; the scaling by 1/2 per stage and the widths are this design's.
module kws_fft #(
  parameter int unsigned W_IN    = 16,
  parameter int unsigned W       = 18,
  parameter int unsigned N       = 128,
  parameter string       TW_FILE = kws_pkg::TWIDDLE_FILE
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  logic                   in_valid,
  input  logic signed [W_IN-1:0] in_data,
  output logic                   in_ready,
  output logic                   out_valid,
  output logic signed [W-1:0]    out_re,
  output logic signed [W-1:0]    out_im,
  input  logic                   out_ready
);
  localparam int unsigned LN = $clog2(N);

  logic                v  [LN+1];
  logic                r  [LN+1];
  logic signed [W-1:0] re [LN+1];
  logic signed [W-1:0] im [LN+1];

  assign v[0]     = in_valid;
  assign re[0]    = W'(in_data);
  assign im[0]    = '0;
  assign in_ready = r[0];

  for (genvar s = 1; s <= int'(LN); s++) begin : g_stage
    kws_fft_stage #(.W(W), .N(N), .STAGE(s), .TW_FILE(TW_FILE)) u_stage (
      .clk, .rst_n, .clr,
      .in_valid(v[s-1]), .in_re(re[s-1]), .in_im(im[s-1]), .in_ready(r[s-1]),
      .out_valid(v[s]), .out_re(re[s]), .out_im(im[s]), .out_ready(r[s])
    );
  end

  kws_fft_reorder #(.W(W), .N(N)) u_result_cache (
    .clk, .rst_n, .clr,
    .in_valid(v[LN]), .in_re(re[LN]), .in_im(im[LN]), .in_ready(r[LN]),
    .out_valid, .out_re, .out_im, .out_ready
  );

endmodule
