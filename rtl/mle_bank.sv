// mle_bank: one SumCheck MLE bank, an on-chip SRAM that holds an MLE table.
//
// 2^LOGN_MAX field elements.  Four synchronous read ports let the PE fetch,
// in one cycle, the four entries that one MLE update folds into the next
// round's (X_i = 0, X_i = 1) pair; two write ports return the two updated
// entries in place.  A fifth, external write port fills the bank from
// off-chip memory (or takes the host's writes), and a sixth read port lets
// the host read a table back, e.g. the final folded value, which is the
// MLE evaluated at the challenge point.  Read data appears one cycle after
// the address.  Writes on different ports to the same address in the same
// cycle are not allowed (asserted).
//
// The paper shows one bank per MLE fed from off-chip or from Build MLE; the
// port count and the in-place update are this design's choices.
module mle_bank
  import zk_pkg::*;
#(
  parameter int unsigned LOGN_MAX = 17
) (
  input  logic                     clk,
  input  logic [3:0][LOGN_MAX-1:0] rd_addr,
  output fe_t  [3:0]               rd_data,
  input  logic [1:0]               wr_en,
  input  logic [1:0][LOGN_MAX-1:0] wr_addr,
  input  fe_t  [1:0]               wr_data,
  input  logic                     ext_wr_en,
  input  logic [LOGN_MAX-1:0]      ext_wr_addr,
  input  fe_t                      ext_wr_data,
  input  logic [LOGN_MAX-1:0]      ext_rd_addr,
  output fe_t                      ext_rd_data
);
  fe_t mem [2**LOGN_MAX];

  always_ff @(posedge clk) begin
    for (int p = 0; p < 4; p++) rd_data[p] <= mem[rd_addr[p]];
    ext_rd_data <= mem[ext_rd_addr];
    if (wr_en[0]) mem[wr_addr[0]] <= wr_data[0];
    if (wr_en[1]) mem[wr_addr[1]] <= wr_data[1];
    if (ext_wr_en) mem[ext_wr_addr] <= ext_wr_data;
  end

  assert property (@(posedge clk) !(wr_en[0] && wr_en[1] && wr_addr[0] == wr_addr[1]));
  assert property (@(posedge clk) !(ext_wr_en && |wr_en));
endmodule
