// regarray: flip-flop register array between the systolic array and the
// BLDL factorization engine.
//
// It holds N(N+1)/2 2x2 blocks of the lower block triangle of A (for U = 16:
// 36 blocks, the paper's (U^2/2+U)/4) plus N blocks for D_jj^-1 (the paper's
// extra U/2 entries), 168 bits each.  The systolic array writes the blocks
// of A through `sa_wr_*`; the engine reads one block per cycle through
// `eng_rd_*` (combinational read) and writes one per cycle through
// `eng_wr_*`.  Every block the engine writes is also presented on the
// `fwd_*` bus towards the systolic array in the same cycle, so that the
// array can collect L and D^-1 for backward substitution while the
// factorization runs.  Entry count and bus width follow the paper; the port
// arrangement and the write-through forward bus are this design's choices.
// The two write ports are used in different phases; an assertion checks they
// never collide.
module regarray
  import prep_pkg::*;
#(
  parameter int N = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sa_wr_en,
  input  logic [AW-1:0] sa_wr_addr,
  input  mat2_t         sa_wr_data,
  input  logic [AW-1:0] eng_rd_addr,
  output mat2_t         eng_rd_data,
  input  logic          eng_wr_en,
  input  logic [AW-1:0] eng_wr_addr,
  input  mat2_t         eng_wr_data,
  output logic          fwd_valid,
  output logic [AW-1:0] fwd_addr,
  output mat2_t         fwd_data
);

  localparam int DEPTH = ra_depth(N);
  localparam int IW    = $clog2(DEPTH);

  mat2_t mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < DEPTH; k++) mem[k] <= '0;
    end else begin
      if (sa_wr_en && int'(sa_wr_addr) < DEPTH)        mem[sa_wr_addr[IW-1:0]]  <= sa_wr_data;
      else if (eng_wr_en && int'(eng_wr_addr) < DEPTH) mem[eng_wr_addr[IW-1:0]] <= eng_wr_data;
    end
  end

  assign eng_rd_data = (int'(eng_rd_addr) < DEPTH) ? mem[eng_rd_addr[IW-1:0]] : '0;
  assign fwd_valid   = eng_wr_en;
  assign fwd_addr    = eng_wr_addr;
  assign fwd_data    = eng_wr_data;

  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n) !(sa_wr_en && eng_wr_en));

endmodule
