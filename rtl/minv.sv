// minv: 2x2 complex matrix inversion unit of the BLDL engine.
//
// It inverts a diagonal block D = [a b; c d] by direct inversion,
// D^-1 = (1/Delta) [d -b; -c a] with the complex determinant Delta = ad - bc,
// in four pipeline stages, the four-cycle latency the paper gives:
//   1. input register (holds its value between issues),
//   2. determinant computation at full precision,
//   3. scalar inversion: Delta is normalised by a power of two, Delta = Dn*2^s
//      with the larger of |Re Dn|, |Im Dn| in [1,2); then 1/Dn =
//      conj(Dn) / |Dn|^2, where the real reciprocal of |Dn|^2 comes from three
//      Newton-Raphson steps x <- x(2 - q x) from the linear start value
//      48/17 - 32/17 q on q scaled into [0.5,1),
//   4. reordering of D into its adjugate and multiplication with 1/Dn.
// Outputs are m = adj(D) / Dn and alpha = -s, so that D^-1 = m * 2^alpha.
//
// The stage names (register, determinant, Newton-Raphson, reorder) and the
// alpha output are those of Fig. 4, and the determinant is complex as in the
// paper's main design (not forced to be real).  The normalisation, the start
// value, the number of iterations and the internal widths (24 fraction bits
// for Dn, 30 for the reciprocal) are this design's choices.  A singular
// block (Delta = 0) returns m = 0.
//
// Interface: d sampled when en is high; m and alpha valid four cycles later
// and held until the next result.  Issues must be at least four cycles apart.
module minv
  import prep_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  mat2_t d,
  output mat2_t m,
  output exp_t  alpha
);

  localparam int    NF  = 24;   // fraction bits of the normalised determinant
  localparam int    RF  = 30;   // fraction bits of the reciprocal
  localparam wide_t C48 = wide_t'(longint'(48.0 / 17.0 * 1073741824.0));
  localparam wide_t C32 = wide_t'(longint'(32.0 / 17.0 * 1073741824.0));
  localparam wide_t TWO = wide_t'(2) <<< RF;

  // stage 1: input register
  mat2_t in_q;
  logic  v1, v2, v3;
  // stage 2: determinant
  wide_t det_re_q, det_im_q;
  // stage 3: 1/Dn and exponent
  wide_t y_re_q, y_im_q;
  exp_t  s_q;

  // ---- stage 3 combinational: normalisation and Newton-Raphson
  wide_t mx, dn_re, dn_im, q, qn, x, tt, r, y_re, y_im;
  int    p, e, s;

  always_comb begin
    mx = (det_re_q < 0 ? -det_re_q : det_re_q);
    if ((det_im_q < 0 ? -det_im_q : det_im_q) > mx) mx = (det_im_q < 0 ? -det_im_q : det_im_q);
    p = 0;
    for (int b = 0; b < 79; b++) if (mx[b]) p = b;
    if (p >= NF) begin
      dn_re = det_re_q >>> (p - NF);
      dn_im = det_im_q >>> (p - NF);
    end else begin
      dn_re = det_re_q <<< (NF - p);
      dn_im = det_im_q <<< (NF - p);
    end
    s  = p - 2 * F;
    q  = (dn_re * dn_re + dn_im * dn_im) >>> NF;        // [1,8), NF fraction bits
    if (q >= (wide_t'(4) <<< NF))      e = 3;
    else if (q >= (wide_t'(2) <<< NF)) e = 2;
    else                               e = 1;
    qn = q >>> e;                                        // [0.5,1)
    x  = C48 - ((C32 * qn) >>> NF);
    for (int it = 0; it < 3; it++) begin
      tt = TWO - ((qn * x) >>> NF);
      x  = (x * tt) >>> RF;
    end
    r    = x >>> e;                                      // 1/|Dn|^2
    y_re = (dn_re * r) >>> RF;
    y_im = -((dn_im * r) >>> RF);
    if (mx == 0) begin
      y_re = '0;
      y_im = '0;
      s    = 0;
    end
  end

  // ---- stage 4 combinational: reorder into the adjugate, scale by 1/Dn
  mat2_t adj, m_d;
  always_comb begin
    adj[0][0] = in_q[1][1];
    adj[0][1] = cneg(in_q[0][1]);
    adj[1][0] = cneg(in_q[1][0]);
    adj[1][1] = in_q[0][0];
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) begin
        m_d[i][j].re = scale_round(wide_t'(adj[i][j].re) * y_re_q - wide_t'(adj[i][j].im) * y_im_q, NF);
        m_d[i][j].im = scale_round(wide_t'(adj[i][j].re) * y_im_q + wide_t'(adj[i][j].im) * y_re_q, NF);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_q     <= '0;
      v1       <= 1'b0;
      v2       <= 1'b0;
      v3       <= 1'b0;
      det_re_q <= '0;
      det_im_q <= '0;
      y_re_q   <= '0;
      y_im_q   <= '0;
      s_q      <= '0;
      m        <= '0;
      alpha    <= '0;
    end else begin
      v1 <= en;
      v2 <= v1;
      v3 <= v2;
      if (en) in_q <= d;
      if (v1) begin
        det_re_q <= cmul_re(in_q[0][0], in_q[1][1]) - cmul_re(in_q[0][1], in_q[1][0]);
        det_im_q <= cmul_im(in_q[0][0], in_q[1][1]) - cmul_im(in_q[0][1], in_q[1][0]);
      end
      if (v2) begin
        y_re_q <= y_re;
        y_im_q <= y_im;
        s_q    <= exp_t'(s);
      end
      if (v3) begin
        m     <= m_d;
        alpha <= -s_q;
      end
    end
  end

  // the single input register is reused by stage 4
  a_issue_spacing: assert property (@(posedge clk) disable iff (!rst_n)
                                    en |-> !(v1 || v2 || v3));

endmodule
