// pe: one processing element of the 4x4 PE array.
//
// A multiply-accumulate cell: psum_out = psum_in + a * b in Q16.16. The four
// PEs of a row are chained through psum so that the row computes one dot
// product of a matrix row with the input vector in one cycle.
// Purely combinational; the array registers the row results.
module pe
  import gs_pkg::*;
(
  input  fx_t a,
  input  fx_t b,
  input  fx_t psum_in,
  output fx_t psum_out
);
  assign psum_out = psum_in + fx_mul(a, b);
endmodule
