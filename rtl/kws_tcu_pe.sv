// kws_tcu_pe: processing element of the template classification array.
//
// Adds the absolute difference between one input feature and the matching
// template feature to the partial sum handed on by its left neighbour and
// hands the result to its right neighbour:
//   psum_out = psum_in + |x - t|.
// A row of these forms the L1 distance between two feature vectors.
// Combinational; the row's result is registered by the caller.
module kws_tcu_pe #(
  parameter int unsigned X_W = 8,
  parameter int unsigned S_W = 13
) (
  input  logic signed [X_W-1:0] x,
  input  logic signed [X_W-1:0] t,
  input  logic [S_W-1:0]        psum_in,
  output logic [S_W-1:0]        psum_out
);
  logic signed [X_W:0] diff;
  logic [X_W:0]        mag;

  assign diff     = (X_W+1)'(x) - (X_W+1)'(t);
  assign mag      = diff[X_W] ? (X_W+1)'(-diff) : (X_W+1)'(diff);
  assign psum_out = psum_in + S_W'(mag);

endmodule
