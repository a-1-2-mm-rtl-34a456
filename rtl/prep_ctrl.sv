// prep_ctrl: top-level sequencer of the preprocessing engine (the FSM of
// Fig. 1).
//
// It runs the four steps of Fig. 2 one after the other for one channel
// matrix:
//   GRAM  B rows of H enter through the valid/ready input, one per cycle
//         (a cycle without in_valid stalls the count), then one REG cycle
//         adds N0/Es to the diagonal                       B + 1 cycles
//   WR    the N(N+1)/2 lower blocks of A are copied from the systolic array
//         into the register array, one per cycle           N(N+1)/2 cycles
//   FACT  the BLDL engine is started and waited for         engine's cycles
//   BSUB  the systolic array runs backward substitution:
//         bs_t = 1 loads, bs_t = 2..2U compute             2U cycles
// With B = 64, U = 16 these are 65, 36 and 32 cycles, the numbers of Fig. 2.
// `start` (accepted in IDLE) also clears the systolic array.  done pulses in
// the cycle after the last backward-substitution cycle.
// The step order and the cycle counts follow the paper; the handshake, the
// state encoding and the block order of WR (block rows top to bottom, each
// row left to right) are this design's choices.
module prep_ctrl
  import prep_pkg::*;
#(
  parameter int U = 16,
  parameter int B = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          in_valid,
  output logic          in_ready,
  output logic          sa_clr,
  output logic          gram_en,
  output logic          reg_en,
  output logic [7:0]    blk_i,
  output logic [7:0]    blk_j,
  output logic          ra_wr_en,
  output logic [AW-1:0] ra_wr_addr,
  output logic          eng_start,
  input  logic          eng_done,
  output logic          bs_load,
  output logic          bs_en,
  output logic [7:0]    bs_t,
  output logic          busy,
  output logic          done
);

  localparam int N = U / 2;

  typedef enum logic [2:0] {S_IDLE, S_GRAM, S_REG, S_WR, S_FSTART, S_FACT, S_BSUB, S_DONE} state_e;
  state_e      state;
  logic [15:0] cnt;
  logic [7:0]  bi, bj;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      bi    <= '0;
      bj    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_GRAM;
          cnt   <= '0;
        end
        S_GRAM: if (in_valid) begin
          cnt <= cnt + 1'b1;
          if (int'(cnt) == B - 1) state <= S_REG;
        end
        S_REG: begin
          state <= S_WR;
          bi    <= '0;
          bj    <= '0;
        end
        S_WR: begin
          if (bj == bi) begin
            bj <= '0;
            bi <= bi + 1'b1;
            if (int'(bi) == N - 1) state <= S_FSTART;
          end else begin
            bj <= bj + 1'b1;
          end
        end
        S_FSTART: state <= S_FACT;
        S_FACT: if (eng_done) begin
          state <= S_BSUB;
          cnt   <= 16'd1;
        end
        S_BSUB: begin
          cnt <= cnt + 1'b1;
          if (int'(cnt) == 2 * U) state <= S_DONE;
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign in_ready   = (state == S_GRAM);
  assign sa_clr     = (state == S_IDLE) && start;
  assign gram_en    = (state == S_GRAM) && in_valid;
  assign reg_en     = (state == S_REG);
  assign blk_i      = bi;
  assign blk_j      = bj;
  assign ra_wr_en   = (state == S_WR);
  assign ra_wr_addr = AW'(int'(bi) * (int'(bi) + 1) / 2 + int'(bj));
  assign eng_start  = (state == S_FSTART);
  assign bs_load    = (state == S_BSUB) && (cnt == 16'd1);
  assign bs_en      = (state == S_BSUB) && (cnt != 16'd1);
  assign bs_t       = (state == S_BSUB) ? cnt[7:0] : 8'd0;
  assign busy       = (state != S_IDLE);
  assign done       = (state == S_DONE);

endmodule
