// product_lane: Product Lane of a SumCheck PE.
//
// Multiplies its NFAC = 4 selected factors at each of the NPTS evaluation
// points with a two-level multiplier tree (two multipliers, then one), as
// drawn in the paper.  The registered product leaves through a demux: to
// the accumulation registers (acc_valid) or, for terms with more factors
// than one lane has, to the Tmp MLE buffer (tmp_valid), chosen by to_tmp.
// Latency one cycle, one hypercube pair per cycle.
module product_lane
  import zk_pkg::*;
#(
  parameter int unsigned NPTS = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic                       to_tmp,
  input  fe_t  [3:0][NPTS-1:0]       f,
  output logic                       acc_valid,
  output logic                       tmp_valid,
  output fe_t  [NPTS-1:0]            prod
);
  fe_t [NPTS-1:0] p01, p23, p;

  for (genvar x = 0; x < NPTS; x++) begin : g_pt
    mod_mul u_m01 (.a(f[0][x]), .b(f[1][x]), .y(p01[x]));
    mod_mul u_m23 (.a(f[2][x]), .b(f[3][x]), .y(p23[x]));
    mod_mul u_m   (.a(p01[x]),  .b(p23[x]),  .y(p[x]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_valid <= 1'b0; tmp_valid <= 1'b0; prod <= '0;
    end else begin
      acc_valid <= in_valid && !to_tmp;
      tmp_valid <= in_valid &&  to_tmp;
      if (in_valid) prod <= p;
    end
  end
endmodule
