// kws_fft_stage: one radix-2 decimation-in-frequency stage of an N-point FFT.
//
// Stage s (1..log2 N) pairs samples H = N >> s apart. For output index j:
//   j & H == 0 : y[j] = (x[j] + x[j+H]) / 2
//   j & H != 0 : y[j] = ((x[j-H] - x[j]) / 2) * W_N^t,  t = (j mod H) << (s-1)
// with W_N = exp(-2 pi i / N). Halving in every stage keeps the magnitude of
// every value at or below that of the input, so the width never grows.
// Three kinds of stage share this module:
//  - general stages (H >= 4) multiply by a Q15 twiddle from the coefficient
//    memory, (a + ib)(c + id) >> 15, truncating;
//  - the quarter stage (H == 2) only needs W^0 = 1 and W^(N/4) = -i, a swap
//    and a negation with no multiplier;
//  - the last stage (H == 1) needs no twiddle at all.
// The input cache is written in arrival order; the data controller emits
// y[j] as soon as both x[j & ~H] and x[j | H] are in the cache, so a stage
// starts after H + 1 inputs and then runs at one output per cycle while
// the rest of the frame is still arriving.
//
// Interface: valid/ready complex streams. in_ready is low from the end of a
// frame's input until its last output has been produced. clr aborts a frame.
// Timing: first output H + 2 cycles after the first input; 1 sample/cycle.
//
// The split into general, quarter and last stages, and the input cache,
// coefficient memory, data control and output register, follow the block
// diagram. The diagram shows several butterfly PEs per stage; this stage uses
// one butterfly computing one output per cycle, enough for the stream rate.
module kws_fft_stage #(
  parameter int unsigned W       = 18,
  parameter int unsigned N       = 128,
  parameter int unsigned STAGE   = 1,
  parameter string       TW_FILE = kws_pkg::TWIDDLE_FILE
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_re,
  input  logic signed [W-1:0] in_im,
  output logic                in_ready,
  output logic                out_valid,
  output logic signed [W-1:0] out_re,
  output logic signed [W-1:0] out_im,
  input  logic                out_ready
);
  localparam int unsigned LN = $clog2(N);
  localparam int unsigned H  = N >> STAGE;

  logic signed [W-1:0] cache_re [N];
  logic signed [W-1:0] cache_im [N];
  logic [LN:0]         wr_cnt, rd_cnt;
  logic [LN-1:0]       j, lo_idx, hi_idx;
  logic                can_emit, load;
  logic signed [W:0]   s_re, s_im, d_re, d_im;
  logic signed [W-1:0] y_re, y_im;

  assign in_ready = (wr_cnt < (LN+1)'(N));
  assign j        = rd_cnt[LN-1:0];
  assign lo_idx   = j & ~LN'(H);
  assign hi_idx   = j | LN'(H);
  assign can_emit = (rd_cnt < (LN+1)'(N)) && (wr_cnt > {1'b0, hi_idx});
  assign load     = can_emit && (!out_valid || out_ready);

  // Butterfly: half sum and half difference.
  always_comb begin
    s_re = (W+1)'(cache_re[lo_idx]) + (W+1)'(cache_re[hi_idx]);
    s_im = (W+1)'(cache_im[lo_idx]) + (W+1)'(cache_im[hi_idx]);
    d_re = (W+1)'(cache_re[lo_idx]) - (W+1)'(cache_re[hi_idx]);
    d_im = (W+1)'(cache_im[lo_idx]) - (W+1)'(cache_im[hi_idx]);
  end

  // Twiddle multiplication of the difference branch.
  if (H >= 4) begin : g_general
    logic [31:0]          tw_mem [N/2];
    logic [LN-2:0]        t;
    logic signed [15:0]   c, d;
    logic signed [W-1:0]  a, b;
    logic signed [W+16:0] p_re, p_im;
    initial $readmemh(TW_FILE, tw_mem);
    assign t    = (LN-1)'((j & LN'(H - 1)) << (STAGE - 1));
    assign c    = tw_mem[t][31:16];
    assign d    = tw_mem[t][15:0];
    assign a    = W'(d_re >>> 1);
    assign b    = W'(d_im >>> 1);
    assign p_re = ((W+17)'(a) * c - (W+17)'(b) * d) >>> 15;
    assign p_im = ((W+17)'(a) * d + (W+17)'(b) * c) >>> 15;
    always_comb begin
      if ((j & LN'(H)) == '0) begin
        y_re = W'(s_re >>> 1);
        y_im = W'(s_im >>> 1);
      end else begin
        y_re = p_re[W-1:0];
        y_im = p_im[W-1:0];
      end
    end
  end else if (H == 2) begin : g_quarter
    // t = 0: multiply by 1; t = N/4: multiply by -i, (a + ib)(-i) = b - ia.
    always_comb begin
      if ((j & LN'(H)) == '0) begin
        y_re = W'(s_re >>> 1);
        y_im = W'(s_im >>> 1);
      end else if (j[0] == 1'b0) begin
        y_re = W'(d_re >>> 1);
        y_im = W'(d_im >>> 1);
      end else begin
        y_re = W'(d_im >>> 1);
        y_im = -W'(d_re >>> 1);
      end
    end
  end else begin : g_last
    always_comb begin
      if (j[0] == 1'b0) begin
        y_re = W'(s_re >>> 1);
        y_im = W'(s_im >>> 1);
      end else begin
        y_re = W'(d_re >>> 1);
        y_im = W'(d_im >>> 1);
      end
    end
  end

  // Input cache.
  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      cache_re[wr_cnt[LN-1:0]] <= in_re;
      cache_im[wr_cnt[LN-1:0]] <= in_im;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_cnt <= '0;
      rd_cnt <= '0;
      out_valid <= 1'b0;
      out_re <= '0;
      out_im <= '0;
    end else if (clr) begin
      wr_cnt <= '0;
      rd_cnt <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (rd_cnt == (LN+1)'(N)) begin
        wr_cnt <= '0;
        rd_cnt <= '0;
      end else begin
        if (in_valid && in_ready) wr_cnt <= wr_cnt + 1'b1;
        if (load) begin
          out_valid <= 1'b1;
          out_re <= y_re;
          out_im <= y_im;
          rd_cnt <= rd_cnt + 1'b1;
        end
      end
    end
  end

endmodule
