// tmp_mle: Tmp MLE buffer of a SumCheck PE.
//
// Holds, for each hypercube pair j of the current round, the NPTS partial
// products a lane produced in the first pass of a round whose terms have
// more factors than a lane can multiply.  The second pass reads them back
// as a factor.  2^(LOGN_MAX-1) words of NPTS elements, one synchronous
// write port and one synchronous read port (data one cycle after address).
// The paper shows the buffer and its feedback path and says it holds extra
// extension points; the two-pass use is this design's reading of that.
module tmp_mle
  import zk_pkg::*;
#(
  parameter int unsigned LOGN_MAX = 17,
  parameter int unsigned NPTS     = 4,
  localparam int unsigned AW      = LOGN_MAX - 1
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  fe_t  [NPTS-1:0]      wr_data,
  input  logic [AW-1:0]        rd_addr,
  output fe_t  [NPTS-1:0]      rd_data
);
  fe_t [NPTS-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
