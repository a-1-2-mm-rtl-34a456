// bldl_engine: block-LDL factorization engine (Alg. 1 on 2x2 blocks).
//
// A processor-like datapath run by the instruction table of bldl_ctrl.  Each
// cycle the current row may fetch one block from the register array into one
// of four operand registers (three for the MMAC, one for the minuend of the
// MSUB), start the arithmetic units and write one block back:
//   MMAC   sum_k L_ik D_kk L_jk^H            latency 2
//   MSUB   A_ij - sum                        latency 1
//   MINV   D_jj^-1 as mantissa block + exponent alpha   latency 4
//   MMULT  (A_ij - sum) D_jj^-1 = L_ij      latency 1
// Written back are D_jj (into the slot of A_jj), D_jj^-1 (mantissa shifted
// by alpha, into its own slot) and L_ij (into the slot of A_ij).
// The four units, their latencies, the operand registers, the shift units and
// the table-plus-FSM control follow Fig. 4 and the text; the write-back
// multiplexer and the operand routing are this design's.
//
// Interface: start (pulse) begins a factorization of the blocks already in
// the register array, done (pulse) ends it; rd_*/wr_* connect to the
// register array.  With N = 8 it takes 448 cycles from start to done.
module bldl_engine
  import prep_pkg::*;
#(
  parameter int N = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [AW-1:0] rd_addr,
  input  mat2_t         rd_data,
  output logic          wr_en,
  output logic [AW-1:0] wr_addr,
  output mat2_t         wr_data
);

  instr_t ins;

  bldl_ctrl #(.N(N)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .instr(ins)
  );

  // operand registers
  mat2_t op0, op1, op2, opa;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op0 <= '0;
      op1 <= '0;
      op2 <= '0;
      opa <= '0;
    end else if (ins.rd_en) begin
      unique case (ins.rd_dst)
        DST_OP0: op0 <= rd_data;
        DST_OP1: op1 <= rd_data;
        DST_OP2: op2 <= rd_data;
        DST_OPA: opa <= rd_data;
        default: ;
      endcase
    end
  end
  assign rd_addr = ins.rd_addr;

  mat2_t acc, sub_q, minv_m, mm_q, dinv;
  exp_t  alpha;

  mmac u_mmac (
    .clk, .rst_n, .en(ins.mmac_en), .clr(ins.mmac_clr),
    .x(op0), .y(op1), .z(op2), .acc
  );

  msub u_msub (
    .clk, .rst_n, .en(ins.msub_en), .use_b(ins.msub_acc),
    .a(opa), .b(acc), .q(sub_q)
  );

  minv u_minv (
    .clk, .rst_n, .en(ins.minv_en), .d(sub_q), .m(minv_m), .alpha
  );

  mmult u_mmult (
    .clk, .rst_n, .en(ins.mmult_en), .a(sub_q), .b(minv_m), .alpha, .q(mm_q)
  );

  mshift u_shift (
    .a(minv_m), .alpha, .q(dinv)
  );

  // write-back multiplexer
  always_comb begin
    unique case (ins.wr_src)
      WSRC_SUB:   wr_data = sub_q;
      WSRC_DINV:  wr_data = dinv;
      WSRC_MMULT: wr_data = mm_q;
      default:    wr_data = sub_q;
    endcase
  end
  assign wr_en   = ins.wr_en;
  assign wr_addr = ins.wr_addr;

endmodule
