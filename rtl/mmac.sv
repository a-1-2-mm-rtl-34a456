// mmac: 2x2 complex matrix multiply-accumulate of the BLDL engine.
//
// It forms the sum over k of X_k * Y_k * Z_k^H, one term per `en` pulse, in
// two pipeline stages: stage 1 registers the product X*Y and the Hermitian
// transpose of Z, stage 2 multiplies them and adds the result to the
// accumulator (or starts a new sum when the term was issued with `clr`).
// The result is in `acc` two cycles after the last term was issued, matching
// the two-cycle latency the paper gives; the two-stage split (product,
// conjugation, product, adder with a feedback register) follows Fig. 4.
// Products are rounded to the 21-bit format after each multiplication and the
// adder saturates, which is this design's choice.
//
// Interface: x, y, z are sampled when en is high; acc holds its value while
// no term is in flight.
module mmac
  import prep_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  clr,
  input  mat2_t x,
  input  mat2_t y,
  input  mat2_t z,
  output mat2_t acc
);

  mat2_t p_q, zh_q;
  logic  v_q, clr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_q   <= '0;
      zh_q  <= '0;
      v_q   <= 1'b0;
      clr_q <= 1'b0;
      acc   <= '0;
    end else begin
      v_q   <= en;
      clr_q <= clr;
      if (en) begin
        p_q  <= mat_mul(x, y);
        zh_q <= mat_herm(z);
      end
      if (v_q) acc <= mat_add(clr_q ? mat2_t'('0) : acc, mat_mul(p_q, zh_q));
    end
  end

endmodule
