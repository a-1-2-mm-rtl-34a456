// prep_pkg: types, fixed-point helpers, register-array address map and the
// instruction format shared by the matrix-preprocessing engine.
//
// Number format: every complex value is two signed 21-bit fixed-point parts
// (the 21-bit width follows the paper; the split into 7 integer and 13
// fraction bits is this design's choice, sized so that a Gram entry of 64 row
// products of unit-magnitude samples still fits).  A 2x2 block of four
// complex values is 168 bits, the width of the register-array buses.
//
// The register array holds the lower block triangle of A (block (I,J), I>=J,
// at address I*(I+1)/2+J) followed by one slot per block row for D_jj^-1.
// During factorization the slot of A_ij (i>j) is overwritten with L_ij and
// the slot of A_jj with D_jj.
//
// The BLDL engine is driven by a table with one instruction row per clock
// cycle.  The row format (instr_t) and the row count (bldl_len) are defined
// here; the table itself is built in bldl_ctrl.
package prep_pkg;

  localparam int W  = 21;          // bits per real part
  localparam int F  = 13;          // fraction bits
  localparam int AW = 8;           // register-array address width

  typedef logic signed [W-1:0] fx_t;
  typedef struct packed { fx_t re; fx_t im; } cplx_t;   // 42 bits
  typedef cplx_t [1:0][1:0] mat2_t;                      // [row][col], 168 bits
  typedef logic signed [79:0] wide_t;                    // intermediate products
  typedef logic signed [7:0] exp_t;                      // power-of-two exponent

  localparam wide_t FX_MAX = (wide_t'(1) <<< (W-1)) - 1;
  localparam wide_t FX_MIN = -(wide_t'(1) <<< (W-1));

  // Saturate a wide value to the W-bit format.
  function automatic fx_t sat(input wide_t v);
    if (v > FX_MAX) return fx_t'(FX_MAX);
    if (v < FX_MIN) return fx_t'(FX_MIN);
    return fx_t'(v);
  endfunction

  // v * 2^-rsh, rounded to nearest and saturated.  A negative rsh shifts left.
  function automatic fx_t scale_round(input wide_t v, input int rsh);
    wide_t r;
    int    l;
    if (rsh > 0) begin
      if (rsh > 70) return '0;
      r = (v + (wide_t'(1) <<< (rsh-1))) >>> rsh;
    end else begin
      l = -rsh;
      if (l > 30) l = 30;
      if (v > (FX_MAX <<< 1) || v < (FX_MIN <<< 1)) return sat(v);
      r = v <<< l;
    end
    return sat(r);
  endfunction

  function automatic cplx_t cadd(input cplx_t a, input cplx_t b);
    cplx_t r;
    r.re = sat(wide_t'(a.re) + wide_t'(b.re));
    r.im = sat(wide_t'(a.im) + wide_t'(b.im));
    return r;
  endfunction

  function automatic cplx_t csub(input cplx_t a, input cplx_t b);
    cplx_t r;
    r.re = sat(wide_t'(a.re) - wide_t'(b.re));
    r.im = sat(wide_t'(a.im) - wide_t'(b.im));
    return r;
  endfunction

  function automatic cplx_t cconj(input cplx_t a);
    cplx_t r;
    r.re = a.re;
    r.im = sat(-wide_t'(a.im));
    return r;
  endfunction

  function automatic cplx_t cneg(input cplx_t a);
    cplx_t r;
    r.re = sat(-wide_t'(a.re));
    r.im = sat(-wide_t'(a.im));
    return r;
  endfunction

  // Full-precision complex product (2F fraction bits), real and imaginary part.
  function automatic wide_t cmul_re(input cplx_t a, input cplx_t b);
    return wide_t'(a.re) * wide_t'(b.re) - wide_t'(a.im) * wide_t'(b.im);
  endfunction
  function automatic wide_t cmul_im(input cplx_t a, input cplx_t b);
    return wide_t'(a.re) * wide_t'(b.im) + wide_t'(a.im) * wide_t'(b.re);
  endfunction

  // Complex product rounded back to the W-bit format.
  function automatic cplx_t cmul(input cplx_t a, input cplx_t b);
    cplx_t r;
    r.re = scale_round(cmul_re(a, b), F);
    r.im = scale_round(cmul_im(a, b), F);
    return r;
  endfunction

  // 2x2 matrix product times 2^alpha; each entry is rounded once.
  function automatic mat2_t mat_mul_scaled(input mat2_t a, input mat2_t b, input int alpha);
    mat2_t r;
    wide_t sr, si;
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) begin
        sr = cmul_re(a[i][0], b[0][j]) + cmul_re(a[i][1], b[1][j]);
        si = cmul_im(a[i][0], b[0][j]) + cmul_im(a[i][1], b[1][j]);
        r[i][j].re = scale_round(sr, F - alpha);
        r[i][j].im = scale_round(si, F - alpha);
      end
    return r;
  endfunction

  function automatic mat2_t mat_mul(input mat2_t a, input mat2_t b);
    return mat_mul_scaled(a, b, 0);
  endfunction

  function automatic mat2_t mat_add(input mat2_t a, input mat2_t b);
    mat2_t r;
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) r[i][j] = cadd(a[i][j], b[i][j]);
    return r;
  endfunction

  function automatic mat2_t mat_sub(input mat2_t a, input mat2_t b);
    mat2_t r;
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) r[i][j] = csub(a[i][j], b[i][j]);
    return r;
  endfunction

  // Hermitian transpose.
  function automatic mat2_t mat_herm(input mat2_t a);
    mat2_t r;
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) r[i][j] = cconj(a[j][i]);
    return r;
  endfunction

  // Every entry times 2^alpha, rounded.
  function automatic mat2_t mat_shift(input mat2_t a, input int alpha);
    mat2_t r;
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) begin
        r[i][j].re = scale_round(wide_t'(a[i][j].re), -alpha);
        r[i][j].im = scale_round(wide_t'(a[i][j].im), -alpha);
      end
    return r;
  endfunction

  // ---------------------------------------------------------------- address map
  function automatic int blk_addr(input int i, input int j);   // lower block (i>=j)
    return i * (i + 1) / 2 + j;
  endfunction
  function automatic int dinv_addr(input int n, input int j);  // D_jj^-1 slot
    return n * (n + 1) / 2 + j;
  endfunction
  function automatic int ra_depth(input int n);
    return n * (n + 1) / 2 + n;
  endfunction

  // ---------------------------------------------------------------- microcode
  typedef enum logic [1:0] {DST_OP0, DST_OP1, DST_OP2, DST_OPA} rd_dst_e;
  typedef enum logic [1:0] {WSRC_SUB, WSRC_DINV, WSRC_MMULT}    wr_src_e;

  typedef struct packed {
    logic          rd_en;     // read one block from the register array
    logic [AW-1:0] rd_addr;
    rd_dst_e       rd_dst;    // operand register that takes it
    logic          mmac_en;   // start one L_ik D_kk L_jk^H term
    logic          mmac_clr;  // ... as the first term of a new sum
    logic          msub_en;   // A_ij minus the MMAC sum
    logic          msub_acc;  // 0: no sum yet (first block column)
    logic          minv_en;   // invert the MSUB result (D_jj)
    logic          mmult_en;  // MSUB result times D_jj^-1
    logic          wr_en;     // write one block to the register array
    logic [AW-1:0] wr_addr;
    wr_src_e       wr_src;
    logic          last;      // final row of the table
  } instr_t;

  // Length in rows (= clock cycles) of the table for n block rows.
  function automatic int bldl_len(input int n);
    int t = 0;
    for (int j = 0; j < n; j++)
      for (int i = j; i < n; i++) begin
        t += (j > 0) ? 3 * j + 3 : 2;
        t += (i == j) ? 5 : 2;
      end
    return t;
  endfunction

endpackage
