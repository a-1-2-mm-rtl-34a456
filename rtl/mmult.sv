// mmult: 2x2 complex matrix-matrix multiplication of the BLDL engine.
//
// On `en` it registers a * b * 2^alpha, one cycle of latency as in the paper.
// It computes L_ij = (A_ij - sum) * D_jj^-1, where b is the mantissa block
// from the inversion unit and alpha its exponent.  Fig. 4 draws the shift in
// front of the multiplier; here the exponent is applied to the full-precision
// products before the single rounding, which gives the same value without
// losing the low bits of the shifted operand.
//
// Interface: a, b, alpha sampled when en is high; q holds until the next en.
module mmult
  import prep_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  mat2_t a,
  input  mat2_t b,
  input  exp_t  alpha,
  output mat2_t q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= '0;
    else if (en) q <= mat_mul_scaled(a, b, int'(alpha));
  end

endmodule
