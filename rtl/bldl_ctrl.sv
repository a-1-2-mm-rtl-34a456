// bldl_ctrl: instruction table (LUT) and sequencing FSM of the block-LDL
// factorization engine.
//
// The table holds one instruction row per clock cycle.  A row names the
// register-array block to fetch and the operand register that takes it, which
// arithmetic units start (MMAC, MSUB, MINV, MMULT) and the block to write back
// with its source.  The FSM waits in IDLE for `start`, then steps a program
// counter through the table, one row per cycle, and raises `done` for one
// cycle after the row marked `last`.  The row is presented combinationally
// from the program counter, so the controls of row k act in the k-th cycle
// after `start`.
//
// That the engine is table driven with one row read per cycle follows the
// paper.  The row format and the schedule are this design's own.  The
// schedule (built by bldl_lut at elaboration, N block rows) walks Alg. 1:
// for every block column j and every block row i >= j it fetches, three
// blocks per MMAC term, the operands L_ik, D_kk, L_jk for k < j, then A_ij,
// subtracts the sum, and either keeps the result as D_jj and inverts it
// (i = j) or multiplies it with D_jj^-1 to get L_ij (i > j).  Work on one
// (i, j) pair does not overlap the next; with N = 8 the table has 448 rows.
//
// Interface: start (pulse), busy, done (pulse), instr (current row).
module bldl_ctrl
  import prep_pkg::*;
#(
  parameter int N = 8              // block rows (U/2)
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  output logic   busy,
  output logic   done,
  output instr_t instr
);

  localparam int LEN = bldl_len(N);
  localparam int PCW = $clog2(LEN + 1);

  typedef instr_t [LEN-1:0] lut_t;

  function automatic lut_t bldl_lut();
    lut_t l;
    int   t, tl, ts;
    for (int r = 0; r < LEN; r++) l[r] = '0;
    t = 0;
    for (int j = 0; j < N; j++)
      for (int i = j; i < N; i++) begin
        // MMAC terms L_ik * D_kk * L_jk^H, one every three cycles
        for (int k = 0; k < j; k++) begin
          l[t+3*k  ].rd_en = 1'b1; l[t+3*k  ].rd_addr = AW'(blk_addr(i, k)); l[t+3*k  ].rd_dst = DST_OP0;
          l[t+3*k+1].rd_en = 1'b1; l[t+3*k+1].rd_addr = AW'(blk_addr(k, k)); l[t+3*k+1].rd_dst = DST_OP1;
          l[t+3*k+2].rd_en = 1'b1; l[t+3*k+2].rd_addr = AW'(blk_addr(j, k)); l[t+3*k+2].rd_dst = DST_OP2;
          l[t+3*k+3].mmac_en  = 1'b1;
          l[t+3*k+3].mmac_clr = (k == 0);
        end
        if (j > 0) begin
          tl = t + 3 * j;
          l[tl].rd_en = 1'b1; l[tl].rd_addr = AW'(blk_addr(i, j)); l[tl].rd_dst = DST_OPA;
          l[tl+2].msub_en  = 1'b1;
          l[tl+2].msub_acc = 1'b1;
          ts = tl + 3;
        end else begin
          l[t].rd_en = 1'b1; l[t].rd_addr = AW'(blk_addr(i, j)); l[t].rd_dst = DST_OPA;
          l[t+1].msub_en  = 1'b1;
          l[t+1].msub_acc = 1'b0;
          ts = t + 2;
        end
        if (i == j) begin
          l[ts].wr_en = 1'b1; l[ts].wr_addr = AW'(blk_addr(j, j)); l[ts].wr_src = WSRC_SUB;
          l[ts].minv_en = 1'b1;
          l[ts+4].wr_en = 1'b1; l[ts+4].wr_addr = AW'(dinv_addr(N, j)); l[ts+4].wr_src = WSRC_DINV;
          t = ts + 5;
        end else begin
          l[ts].mmult_en = 1'b1;
          l[ts+1].wr_en = 1'b1; l[ts+1].wr_addr = AW'(blk_addr(i, j)); l[ts+1].wr_src = WSRC_MMULT;
          t = ts + 2;
        end
      end
    l[t-1].last = 1'b1;
    return l;
  endfunction

  localparam lut_t LUT = bldl_lut();

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;
  state_e         state;
  logic [PCW-1:0] pc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pc    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          pc    <= '0;
        end
        S_RUN: begin
          if (LUT[pc].last) state <= S_DONE;
          else              pc    <= pc + 1'b1;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    instr = '0;
    if (state == S_RUN) instr = LUT[pc];
  end

  assign busy = (state == S_RUN);
  assign done = (state == S_DONE);

endmodule
