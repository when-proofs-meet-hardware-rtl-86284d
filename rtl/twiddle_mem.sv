// twiddle_mem: twiddle-factor memory of the NTT system.
//
// Holds DEPTH = 2^(LOGN_MAX-1) field elements, entry k = omega^k where omega
// is a primitive 2^LOGN_MAX-th root of unity (the host loads omega^-k for an
// inverse transform).  One synchronous write port loads the table; NRD read
// ports (one per butterfly) return the addressed entry one cycle after the
// address is presented.  The table is loaded rather than computed on chip:
// the paper shows a twiddle memory feeding the butterflies but does not say
// how it is filled.
module twiddle_mem
  import zk_pkg::*;
#(
  parameter int unsigned LOGN_MAX = 17,
  parameter int unsigned NRD      = 4,
  localparam int unsigned AW      = LOGN_MAX - 1
) (
  input  logic                   clk,
  input  logic                   wr_en,
  input  logic [AW-1:0]          wr_addr,
  input  fe_t                    wr_data,
  input  logic [NRD-1:0][AW-1:0] rd_addr,
  output fe_t  [NRD-1:0]         rd_data
);
  fe_t mem [2**AW];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    for (int i = 0; i < NRD; i++) rd_data[i] <= mem[rd_addr[i]];
  end
endmodule
