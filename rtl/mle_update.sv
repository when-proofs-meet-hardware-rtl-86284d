// mle_update: MLE Update unit of a SumCheck PE.
//
// Folds an MLE table with the previous round's challenge alpha:
//   T'[j] = T[j] + alpha * (T[j + M'] - T[j])
// Two folds per cycle (two modular multipliers), producing the two entries
// that form the next round's pair (X_i = 0 and X_i = 1):
//   e0 = fold(p0, p1), e1 = fold(p2, p3)   when upd = 1,
//   e0 = p0,           e1 = p1             when upd = 0 (round 1, or the
//                                          second pass of a round).
// The update-by-alpha_{i-1} step and its two multiplications per pair are
// the paper's; the port arrangement is this design's.  Registered output,
// one cycle latency, one pair per cycle.
module mle_update
  import zk_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       upd,
  input  fe_t        alpha,
  input  fe_t  [3:0] p,
  output logic       out_valid,
  output fe_t        e0,
  output fe_t        e1
);
  fe_t d0, d1, m0, m1, f0, f1;

  mod_add u_d0 (.a(p[1]), .b(p[0]), .sub(1'b1), .y(d0));
  mod_add u_d1 (.a(p[3]), .b(p[2]), .sub(1'b1), .y(d1));
  mod_mul u_m0 (.a(d0), .b(alpha), .y(m0));
  mod_mul u_m1 (.a(d1), .b(alpha), .y(m1));
  mod_add u_f0 (.a(p[0]), .b(m0), .sub(1'b0), .y(f0));
  mod_add u_f1 (.a(p[2]), .b(m1), .sub(1'b0), .y(f1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; e0 <= '0; e1 <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        e0 <= upd ? f0 : p[0];
        e1 <= upd ? f1 : p[1];
      end
    end
  end
endmodule
