// msub: 2x2 complex matrix subtraction of the BLDL engine.
//
// On `en` it registers a - b (or a alone when use_b is low, for the first
// block column of the factorization, where no sum has been formed yet).  The
// result is available one cycle later, the latency the paper gives.  Each
// of the eight real subtractions saturates to the 21-bit format.
//
// Interface: a, b, use_b sampled when en is high; q holds until the next en.
module msub
  import prep_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  use_b,
  input  mat2_t a,
  input  mat2_t b,
  output mat2_t q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= '0;
    else if (en) q <= mat_sub(a, use_b ? b : mat2_t'('0));
  end

endmodule
