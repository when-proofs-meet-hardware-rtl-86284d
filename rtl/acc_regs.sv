// acc_regs: Accumulation Registers of the SumCheck system.
//
// One register per product lane and evaluation point accumulates that
// lane's products over the Boolean hypercube: acc[l][x] += prod[l][x]
// whenever add_en[l].  clear zeroes all of them at the start of a round.
// The round polynomial's evaluations are the sums over lanes,
// G(x) = sum_l acc[l][x], formed by an adder tree on the outputs
// (combinational from the registers).
module acc_regs
  import zk_pkg::*;
#(
  parameter int unsigned NLANE = 4,
  parameter int unsigned NPTS  = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic [NLANE-1:0]             add_en,
  input  fe_t  [NLANE-1:0][NPTS-1:0]   prod,
  output fe_t  [NPTS-1:0]              g
);
  fe_t [NLANE-1:0][NPTS-1:0] acc, acc_nx;
  fe_t [NLANE:0][NPTS-1:0]   part;

  for (genvar l = 0; l < NLANE; l++) begin : g_l
    for (genvar x = 0; x < NPTS; x++) begin : g_x
      mod_add u_acc (.a(acc[l][x]), .b(prod[l][x]), .sub(1'b0), .y(acc_nx[l][x]));
      mod_add u_sum (.a(part[l][x]), .b(acc[l][x]), .sub(1'b0), .y(part[l+1][x]));
    end
  end
  assign part[0] = '0;
  assign g       = part[NLANE];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (clear) acc <= '0;
    else begin
      for (int l = 0; l < NLANE; l++) if (add_en[l]) acc[l] <= acc_nx[l];
    end
  end
endmodule
