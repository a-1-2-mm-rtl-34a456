// systolic_array: upper-triangular array of (U^2+U)/2 processing elements
// that computes the Gram matrix and, reused, the backward substitution.
//
// Gram mode: element (m,n), m <= n, accumulates conj(h_m) h_n over the rows
// of H fed one per cycle on h_row (gram_en), so after B rows it holds
// g_mn of G = H^H H; one reg_en cycle then adds N0/Es to the diagonal.  The
// result leaves as 2x2 lower blocks A_IJ (I >= J), one per cycle, on blk_out
// for the block selected by blk_i/blk_j.
//
// Backward substitution solves L^H X = D^-1 L^-1 for X = A^-1 (upper
// triangle).  While the factorization runs, every block written to the
// register array arrives on ld_*; the array keeps -conj(L_jm) as the
// coefficient of row m and column j, and the upper entries of each D_jj^-1.
// Cycle t = 1 (bs_load) loads every block-diagonal element with its D^-1
// entry and clears the rest.  In cycle t = 2..2U (bs_en) element (m,n)
// produces x_mn at t = 2U - m - n (0-based indices) and the value on column
// n in cycle t is x_jn with j = 2U - n - t: from the elements below for
// j <= n, and for j > n the conjugate of x_nj taken from the top of column j
// through the multiplexer in front of the diagonal element.  Row m's
// coefficients enter at the right end, -conj(L_jm) in cycle U - j, and move
// one element to the left per cycle, so each element meets the coefficient
// of the value passing it.  Element (U-1,U-1) sends its result in cycle 2,
// element (U-2,U-2) in cycle 4, and x_00 leaves in cycle 2U: 2U cycles as
// in the paper.
// out_data[n] is the top of column n; out_valid[n] marks cycles where it
// carries an upper-triangle entry x_jn, j = out_row[n].
//
// The triangular shape, the two modes, the multiplexers in front of the
// diagonal elements, the leftward coefficient chain and the schedule follow
// Fig. 3 and the text.  Collecting L and D^-1 from the register array's
// write traffic (so that no extra transfer cycles are needed) and the
// combinational read-out multiplexer are this design's choices.
module systolic_array
  import prep_pkg::*;
#(
  parameter int U = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          gram_en,
  input  cplx_t         h_row [U],
  input  logic          reg_en,
  input  fx_t           reg_val,
  input  logic [7:0]    blk_i,
  input  logic [7:0]    blk_j,
  output mat2_t         blk_out,
  input  logic          ld_valid,
  input  logic [AW-1:0] ld_addr,
  input  mat2_t         ld_data,
  input  logic          bs_load,
  input  logic          bs_en,
  input  logic [7:0]    bs_t,
  output cplx_t         out_data  [U],
  output logic          out_valid [U],
  output logic [7:0]    out_row   [U]
);

  localparam int N    = U / 2;
  localparam int NBLK = N * (N + 1) / 2;

  cplx_t xo   [U][U];
  cplx_t accs [U][U];
  cplx_t coef [U][U];   // coef[m][j]: -conj(L_jm), m < j, different blocks
  cplx_t dinv [U][U];   // dinv[m][n]: D^-1 entry, same block, m <= n

  // ---------------------------------------------------------- L / D^-1 capture
  for (genvar bi = 0; bi < N; bi++) begin : g_cap_i
    for (genvar bj = 0; bj <= bi; bj++) begin : g_cap_j
      for (genvar r = 0; r < 2; r++) begin : g_r
        for (genvar c = 0; c < 2; c++) begin : g_c
          if (bi > bj) begin : g_l
            always_ff @(posedge clk or negedge rst_n) begin
              if (!rst_n) coef[2*bj+c][2*bi+r] <= '0;
              else if (ld_valid && int'(ld_addr) == blk_addr(bi, bj))
                coef[2*bj+c][2*bi+r] <= cneg(cconj(ld_data[r][c]));
            end
          end else if (r <= c) begin : g_d
            always_ff @(posedge clk or negedge rst_n) begin
              if (!rst_n) dinv[2*bj+r][2*bj+c] <= '0;
              else if (ld_valid && int'(ld_addr) == NBLK + bj)
                dinv[2*bj+r][2*bj+c] <= ld_data[r][c];
            end
          end
        end
      end
    end
  end

  // ---------------------------------------------------------- processing elements
  for (genvar m = 0; m < U; m++) begin : g_row
    for (genvar n = m; n < U; n++) begin : g_col
      cplx_t a_in, b_in, load_val, y_o;
      logic  own;

      if (m == n) begin : g_ain_d
        assign a_in = g_dmux[n].dg;
      end else begin : g_ain_o
        assign a_in = g_row[m+1].g_col[n].y_o;
      end

      if (n == U - 1) begin : g_bin_e
        // coefficient feed: -conj(L_jm) with j = U - t, enters in cycle t
        always_comb begin
          b_in = '0;
          for (int j = m + 1; j < U; j++)
            if ((j / 2 != m / 2) && (int'(bs_t) == U - j)) b_in = coef[m][j];
        end
      end else begin : g_bin_c
        assign b_in = xo[m][n+1];
      end

      if (m / 2 == n / 2) begin : g_ld_d
        assign load_val = dinv[m][n];
      end else begin : g_ld_o
        assign load_val = '0;
      end

      assign own = bs_en && (int'(bs_t) == 2 * U - m - n);

      pe u_pe (
        .clk, .rst_n, .clr,
        .gram_en,
        .reg_en  (reg_en && (m == n)),
        .reg_val,
        .bs_load,
        .load_val,
        .bs_en,
        .own,
        .A       (h_row[n]),
        .B       (h_row[m]),
        .a_in,
        .b_in,
        .x_out   (xo[m][n]),
        .y_out   (y_o),
        .acc     (accs[m][n])
      );
    end
  end

  // multiplexer in front of each diagonal element: conj(x_nj), j = 2U - n - t
  for (genvar n = 0; n < U; n++) begin : g_dmux
    cplx_t [U-1:0] cand;
    cplx_t         dg;
    for (genvar j = 0; j < U; j++) begin : g_cand
      if (j > n) begin : g_use
        assign cand[j] = (int'(bs_t) == 2 * U - n - j) ? cconj(g_row[0].g_col[j].y_o) : '0;
      end else begin : g_zero
        assign cand[j] = '0;
      end
    end
    always_comb begin
      dg = '0;
      for (int j = 0; j < U; j++) dg = dg | cand[j];   // at most one is non-zero
    end
  end

  // ---------------------------------------------------------- outputs
  for (genvar n = 0; n < U; n++) begin : g_out
    int jr;
    assign jr           = 2 * U - n - int'(bs_t);
    assign out_data[n]  = g_row[0].g_col[n].y_o;
    assign out_valid[n] = bs_en && (jr >= 0) && (jr <= n);
    assign out_row[n]   = 8'(jr);
  end

  // Gram read-out: lower block (blk_i, blk_j) of A
  always_comb begin
    int p, q;
    blk_out = '0;
    for (int r = 0; r < 2; r++)
      for (int c = 0; c < 2; c++) begin
        p = 2 * int'(blk_i) + r;
        q = 2 * int'(blk_j) + c;
        for (int a = 0; a < U; a++)
          for (int b = a; b < U; b++) begin
            if (a == p && b == q) blk_out[r][c] = accs[a][b];
            if (a == q && b == p && a != b) blk_out[r][c] = cconj(accs[a][b]);
          end
      end
  end

endmodule
