// kws_power_spectrum: power of each FFT bin, P = re^2 + im^2.
//
// The complex bin is captured in an input register, squared by two
// multipliers and summed; the sum goes to the output register. The sum is
// saturated to POW_W bits (with the FFT's 1/N scaling it never exceeds
// 2^(2W-3) for W-bit bins whose magnitude is at most 2^(W-2)).
//
// Interface: valid/ready streams; clr drops the values in flight.
// Timing: two register stages, one bin per cycle.
//
// The register-multiply-add-register structure is the block diagram's; the
// widths are this design's.
module kws_power_spectrum #(
  parameter int unsigned W     = 18,
  parameter int unsigned POW_W = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_re,
  input  logic signed [W-1:0] in_im,
  output logic                in_ready,
  output logic                out_valid,
  output logic [POW_W-1:0]    out_data,
  input  logic                out_ready
);
  logic                r_valid;
  logic signed [W-1:0] r_re, r_im;
  logic [2*W:0]        p;
  logic                r_ready;

  assign r_ready  = !out_valid || out_ready;
  assign in_ready = !r_valid || r_ready;
  assign p        = (2*W+1)'(r_re * r_re) + (2*W+1)'(r_im * r_im);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_valid <= 1'b0;
      r_re <= '0;
      r_im <= '0;
      out_valid <= 1'b0;
      out_data <= '0;
    end else if (clr) begin
      r_valid <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (r_valid && r_ready) begin
        out_valid <= 1'b1;
        out_data <= (p > (2*W+1)'({POW_W{1'b1}})) ? {POW_W{1'b1}} : POW_W'(p);
        r_valid <= 1'b0;
      end
      if (in_valid && in_ready) begin
        r_valid <= 1'b1;
        r_re <= in_re;
        r_im <= in_im;
      end
    end
  end

endmodule
