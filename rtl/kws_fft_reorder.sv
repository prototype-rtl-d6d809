// kws_fft_reorder: the FFT's data-reverse result cache.
//
// A decimation-in-frequency FFT delivers its bins in bit-reversed order.
// Samples are written into the cache in arrival order j; output k is cache
// entry bitrev(k), emitted as soon as that entry has been written, so bins
// leave in natural order 0..N-1.
//
// Interface: valid/ready complex streams, clr aborts a frame.
// Timing: one bin per cycle once the needed entry is present; in_ready is
// low between the end of a frame's input and the end of its output.
module kws_fft_reorder #(
  parameter int unsigned W = 18,
  parameter int unsigned N = 128
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

  logic signed [W-1:0] cache_re [N];
  logic signed [W-1:0] cache_im [N];
  logic [LN:0]         wr_cnt, rd_cnt;
  logic [LN-1:0]       rev;
  logic                load;

  always_comb begin
    for (int i = 0; i < int'(LN); i++) rev[i] = rd_cnt[LN-1-i];
  end

  assign in_ready = (wr_cnt < (LN+1)'(N));
  assign load     = (rd_cnt < (LN+1)'(N)) && (wr_cnt > {1'b0, rev}) && (!out_valid || out_ready);

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
          out_re <= cache_re[rev];
          out_im <= cache_im[rev];
          rd_cnt <= rd_cnt + 1'b1;
        end
      end
    end
  end

endmodule
