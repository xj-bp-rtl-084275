// xjbp_msg_mem: message store for one direction (all L or all R messages).
//
// Holds COLS columns of N LLR words each. The decoder works on one or two
// columns per clock, so the store offers two column-wide read ports
// (combinational) and two column-wide write ports with a per-word mask; where
// both write ports hit the same word, port 1 wins. A synchronous clear sets
// every word to 0 (no belief) before a new codeword; a write in the same cycle
// still lands. The paper only says that every node carries an L and an R
// message; the organisation as a register array is a choice of this design.
module xjbp_msg_mem
  import xjbp_pkg::*;
#(
  parameter int unsigned N    = 1024,
  parameter int unsigned COLS = 11,
  localparam int unsigned CW  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic          clk,
  input  logic          clear,
  input  logic [CW-1:0] rd_col_a,
  output llr_t          rd_a     [N],
  input  logic [CW-1:0] rd_col_b,
  output llr_t          rd_b     [N],
  input  logic          we0,
  input  logic [CW-1:0] wr_col0,
  input  logic          wr_mask0 [N],
  input  llr_t          wr_data0 [N],
  input  logic          we1,
  input  logic [CW-1:0] wr_col1,
  input  logic          wr_mask1 [N],
  input  llr_t          wr_data1 [N]
);

  llr_t mem [COLS][N];

  always_ff @(posedge clk) begin
    for (int c = 0; c < COLS; c++) begin
      for (int i = 0; i < N; i++) begin
        if (we1 && wr_col1 == CW'(c) && wr_mask1[i])
          mem[c][i] <= wr_data1[i];
        else if (we0 && wr_col0 == CW'(c) && wr_mask0[i])
          mem[c][i] <= wr_data0[i];
        else if (clear)
          mem[c][i] <= '0;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      rd_a[i] = (32'(rd_col_a) < COLS) ? mem[rd_col_a][i] : '0;
      rd_b[i] = (32'(rd_col_b) < COLS) ? mem[rd_col_b][i] : '0;
    end
  end

endmodule
