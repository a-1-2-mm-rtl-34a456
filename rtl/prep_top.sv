// prep_top: LMMSE matrix-preprocessing engine for a B x U channel matrix
// (default 64 antennas x 16 users).
//
// Given the rows of H and the regularisation N0/Es it returns the upper
// triangle of A^-1 with A = H^H H + (N0/Es) I.  The systolic array forms A
// (Gram mode), the register array buffers its 2x2 blocks, the BLDL engine
// factorises A = L D L^H in place, and the systolic array, reused, solves
// L^H X = D^-1 L^-1 for X = A^-1 by backward substitution.  prep_ctrl
// sequences the steps (Fig. 1 and Fig. 2).
//
// Interface:
//   start            pulse in idle: begin a matrix (clears the array)
//   in_valid/in_ready one row of H (U complex values, 21+21 bits each) per
//                    accepted cycle, B rows, each row normalised to its
//                    largest magnitude
//   reg_val          N0/Es in the 21-bit format, read in the cycle after
//                    the last row
//   out_valid[n]     column n of the array carries x_jn, j = out_row[n],
//                    on out_data[n]; over the last 2U-1 cycles every upper
//                    entry appears exactly once
//   done             one-cycle pulse after the last output
// One matrix takes B + 1 + N(N+1)/2 + (engine) + 2U cycles plus three
// cycles of hand-over (start, engine start, done): with the defaults
// 65 + 36 + 448 + 32 + 3 = 584 cycles, matrices are processed one at a time.
// Bus widths (672-bit rows, 168-bit block buses) follow Fig. 1.
module prep_top
  import prep_pkg::*;
#(
  parameter int U = 16,
  parameter int B = 64
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       in_valid,
  output logic       in_ready,
  input  cplx_t      in_row    [U],
  input  fx_t        reg_val,
  output logic       out_valid [U],
  output logic [7:0] out_row   [U],
  output cplx_t      out_data  [U],
  output logic       busy,
  output logic       done
);

  localparam int N = U / 2;

  logic          sa_clr, gram_en, reg_en, ra_wr_en, eng_start, eng_done, eng_busy;
  logic          bs_load, bs_en;
  logic [7:0]    blk_i, blk_j, bs_t;
  logic [AW-1:0] ra_wr_addr, eng_rd_addr, eng_wr_addr, fwd_addr;
  logic          eng_wr_en, fwd_valid;
  mat2_t         blk, eng_rd_data, eng_wr_data, fwd_data;

  prep_ctrl #(.U(U), .B(B)) u_ctrl (
    .clk, .rst_n, .start, .in_valid, .in_ready,
    .sa_clr, .gram_en, .reg_en, .blk_i, .blk_j,
    .ra_wr_en, .ra_wr_addr, .eng_start, .eng_done,
    .bs_load, .bs_en, .bs_t, .busy, .done
  );

  systolic_array #(.U(U)) u_sa (
    .clk, .rst_n,
    .clr      (sa_clr),
    .gram_en,
    .h_row    (in_row),
    .reg_en,
    .reg_val,
    .blk_i,
    .blk_j,
    .blk_out  (blk),
    .ld_valid (fwd_valid),
    .ld_addr  (fwd_addr),
    .ld_data  (fwd_data),
    .bs_load,
    .bs_en,
    .bs_t,
    .out_data,
    .out_valid,
    .out_row
  );

  regarray #(.N(N)) u_ra (
    .clk, .rst_n,
    .sa_wr_en    (ra_wr_en),
    .sa_wr_addr  (ra_wr_addr),
    .sa_wr_data  (blk),
    .eng_rd_addr,
    .eng_rd_data,
    .eng_wr_en,
    .eng_wr_addr,
    .eng_wr_data,
    .fwd_valid,
    .fwd_addr,
    .fwd_data
  );

  bldl_engine #(.N(N)) u_eng (
    .clk, .rst_n,
    .start   (eng_start),
    .busy    (eng_busy),
    .done    (eng_done),
    .rd_addr (eng_rd_addr),
    .rd_data (eng_rd_data),
    .wr_en   (eng_wr_en),
    .wr_addr (eng_wr_addr),
    .wr_data (eng_wr_data)
  );

  // the engine runs only while the systolic array is not writing the register array
  a_one_writer_phase: assert property (@(posedge clk) disable iff (!rst_n) eng_busy |-> !ra_wr_en);

endmodule
