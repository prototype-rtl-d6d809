// kws_mel_filter: triangular Mel filter bank exploiting its sparsity.
//
// Neighbouring triangular filters overlap by half, so every spectrum bin
// lies in at most two filters, one with an even and one with an odd index.
// The bank therefore needs only two multiply-accumulate units: the even MAC
// accumulates w_even[b] * P[b] and the odd MAC w_odd[b] * P[b]. A boundary
// flag per bin marks where the oldest open filter ends (the next filter's
// peak): at such a bin the boundary counter names the finished filter f, the
// output multiplexer sends the MAC of f's parity out (scaled by 2^-8) and that
// MAC restarts with the current bin's product for filter f + 2. After
// NUM_MEL boundaries all filters are out; the remaining bins of the frame
// (NUM_BINS..N-1, the mirrored half of the spectrum) are counted and dropped.
//
// Table (MEL_FILE), one entry per bin 0..NUM_BINS-1:
//   {boundary, w_odd[7:0], w_even[7:0]}, weights unsigned with 255 = 1.0,
// built from NUM_MEL + 2 points equally spaced on the Mel scale
// (mel = 2595 log10(1 + f/700)) between 0 and 4 kHz for an 8 kHz sample rate,
// mapped to bins floor(129 f / 8000) and forced strictly increasing.
//
// Interface: N power values per frame in (valid/ready), NUM_MEL filter
// energies per frame out (valid/ready). clr restarts at bin 0.
// Timing: one bin per cycle; a filter's output is registered at its boundary.
//
// The odd/even split, boundary and coefficient memories and counters, MACs,
// scale and multiplexer follow the block diagram; the table layout, 8-bit
// weights and scaling are this design's choices.
module kws_mel_filter #(
  parameter int unsigned W        = 32,
  parameter int unsigned N        = 128,
  parameter int unsigned NUM_BINS = 65,
  parameter int unsigned NUM_MEL  = 20,
  parameter string       MEL_FILE = kws_pkg::MEL_FILE
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         in_ready,
  output logic         out_valid,
  output logic [W-1:0] out_data,
  input  logic         out_ready
);
  localparam int unsigned BW = $clog2(N);
  localparam int unsigned FW = $clog2(NUM_MEL + 1);
  localparam int unsigned AW = W + 8 + 4;

  logic [16:0]   tbl [NUM_BINS];
  logic [BW-1:0] bin;          // coefficient counter
  logic [FW-1:0] filt;         // boundary counter: next filter to finish
  logic [AW-1:0] acc_even, acc_odd;
  logic [16:0]   entry;
  logic          in_band, bnd, fire;
  logic [AW-1:0] p_even, p_odd, done_acc, scaled;

  initial $readmemh(MEL_FILE, tbl);

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;
  assign in_band  = (bin < BW'(NUM_BINS));
  assign entry    = in_band ? tbl[bin[$clog2(NUM_BINS)-1:0]] : '0;
  assign bnd      = in_band && entry[16] && (filt < FW'(NUM_MEL));
  assign p_odd    = AW'(in_data) * AW'(entry[15:8]);
  assign p_even   = AW'(in_data) * AW'(entry[7:0]);
  assign done_acc = filt[0] ? acc_odd : acc_even;
  assign scaled   = done_acc >> 8;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bin <= '0;
      filt <= '0;
      acc_even <= '0;
      acc_odd <= '0;
      out_valid <= 1'b0;
      out_data <= '0;
    end else if (clr) begin
      bin <= '0;
      filt <= '0;
      acc_even <= '0;
      acc_odd <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        // Even and odd MACs; the finished filter's MAC restarts.
        acc_even <= ((bnd && !filt[0]) ? '0 : acc_even) + p_even;
        acc_odd  <= ((bnd &&  filt[0]) ? '0 : acc_odd)  + p_odd;
        if (bnd) begin
          out_valid <= 1'b1;
          out_data <= (scaled > AW'({W{1'b1}})) ? {W{1'b1}} : W'(scaled);
          filt <= filt + 1'b1;
        end
        if (bin == BW'(N - 1)) begin
          bin <= '0;
          filt <= '0;
          acc_even <= '0;
          acc_odd <= '0;
        end else begin
          bin <= bin + 1'b1;
        end
      end
    end
  end

endmodule
