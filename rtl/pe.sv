// pe: processing element of the triangular systolic array.
//
// One complex multiplier (four real multipliers) feeding an accumulator, with
// operand multiplexers for the two modes of the array:
//   Gram mode (gram_en):  acc += A * conj(B), where A and B are the two
//                         entries of the current channel-matrix row that the
//                         element's column and row broadcast to it;
//                         reg_en adds reg_val to acc (diagonal elements).
//   Backward substitution: bs_load loads acc with its right-hand-side value;
//                         each bs_en cycle acc += a_in * b, where a_in is the
//                         value travelling up the column and b the
//                         coefficient held in the element's b register.
// The b register shifts coefficients from b_in (right neighbour) to x_out
// (left neighbour) every backward-substitution cycle.  y_out is the element's
// own result when `own` is high and otherwise passes a_in up to the element
// above.
// The multiplier, accumulator, conjugation, the A/B/a/b/X/Y ports and the b
// register follow Fig. 3.  Fig. 3 also draws a register on the a-to-Y path;
// here that path is combinational, because with a register per hop the
// column could not deliver the 2U-cycle backward substitution the text
// states (a value must reach every element above within one cycle).
// Products are rounded to 21 bits and the accumulator saturates.
module pe
  import prep_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,       // clear accumulator and b register
  input  logic  gram_en,
  input  logic  reg_en,
  input  fx_t   reg_val,
  input  logic  bs_load,
  input  cplx_t load_val,
  input  logic  bs_en,
  input  logic  own,
  input  cplx_t A,
  input  cplx_t B,
  input  cplx_t a_in,
  input  cplx_t b_in,
  output cplx_t x_out,
  output cplx_t y_out,
  output cplx_t acc
);

  cplx_t b_q, opx, opy, prod, reg_c;

  always_comb begin
    opx   = gram_en ? A : a_in;
    opy   = gram_en ? cconj(B) : b_q;
    prod  = cmul(opx, opy);
    reg_c = '{re: reg_val, im: '0};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      b_q <= '0;
    end else if (clr) begin
      acc <= '0;
      b_q <= '0;
    end else begin
      if (bs_load)                acc <= load_val;
      else if (gram_en || bs_en)  acc <= cadd(acc, prod);
      else if (reg_en)            acc <= cadd(acc, reg_c);
      if (bs_load || bs_en)       b_q <= b_in;
    end
  end

  assign x_out = b_q;
  assign y_out = own ? acc : a_in;

endmodule
