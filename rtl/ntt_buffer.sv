// ntt_buffer: one on-chip buffer of the NTT system (ping, pong, prefetch or
// result buffer).
//
// DEPTH = 2^LOGN_MAX field elements, organised as rows of LANES elements
// (LANES = number of butterflies, at least 2).  The constant-geometry NTT
// reads two rows per cycle (elements j and j + N/2 for every butterfly) and
// writes two rows per cycle (elements 2j and 2j+1), so the buffer has two
// row-wide read ports and two row-wide write ports; a scalar port moves single elements to
// and from the off-chip stream.  Reads are synchronous (one-cycle latency).
// The scalar write has priority over row write port 0 only if both address
// the same row in the same cycle, which the controllers never do.
//
// The multi-ported array is a behavioural stand-in for the banked SRAM the
// paper provisions; the paper gives the buffers' roles, not their banking.
module ntt_buffer
  import zk_pkg::*;
#(
  parameter int unsigned LOGN_MAX = 17,
  parameter int unsigned LANES    = 4,
  localparam int unsigned LOGL    = $clog2(LANES),
  localparam int unsigned RAW     = LOGN_MAX - LOGL,   // row address width
  localparam int unsigned EAW     = LOGN_MAX           // element address width
) (
  input  logic                      clk,
  // row read ports
  input  logic [1:0][RAW-1:0]       rd_row,
  output fe_t  [1:0][LANES-1:0]     rd_data,
  // row write ports
  input  logic [1:0]                wr_en,
  input  logic [1:0][RAW-1:0]       wr_row,
  input  fe_t  [1:0][LANES-1:0]     wr_data,
  // scalar port (stream side)
  input  logic                      s_wr_en,
  input  logic [EAW-1:0]            s_wr_addr,
  input  fe_t                       s_wr_data,
  input  logic [EAW-1:0]            s_rd_addr,
  output fe_t                       s_rd_data
);
  fe_t mem [2**RAW][LANES];

  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      for (int l = 0; l < LANES; l++) rd_data[p][l] <= mem[rd_row[p]][l];
      if (wr_en[p]) begin
        for (int l = 0; l < LANES; l++) mem[wr_row[p]][l] <= wr_data[p][l];
      end
    end
    if (s_wr_en) mem[s_wr_addr[EAW-1:LOGL]][s_wr_addr[LOGL-1:0]] <= s_wr_data;
    s_rd_data <= mem[s_rd_addr[EAW-1:LOGL]][s_rd_addr[LOGL-1:0]];
  end
endmodule
