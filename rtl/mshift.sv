// mshift: scales every entry of a 2x2 complex block by 2^alpha.
//
// It applies the exponent produced by the matrix inversion unit: the
// inversion returns D^-1 as a block M and an exponent alpha with
// D^-1 = M * 2^alpha, and this unit turns M into D^-1 before it is written
// back.  A right shift rounds to nearest; a left shift saturates.  Fig. 4
// shows the shift units and the alpha signal; what alpha encodes is not
// spelled out in the paper and is this design's reading.  Purely
// combinational.
module mshift
  import prep_pkg::*;
(
  input  mat2_t a,
  input  exp_t  alpha,
  output mat2_t q
);

  assign q = mat_shift(a, int'(alpha));

endmodule
