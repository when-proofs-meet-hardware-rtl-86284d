// ew_unit: element-wise arithmetic unit of the NTT system.
//
// Streams one element per cycle and computes
//   FMA   : y_i = (a_i * b_i + c_i) * s_i
//   SCALE : y_i = a_i * s_i
// where s_i = s0 * ratio^i is generated on the fly (s0 and ratio are loaded
// with cfg_load, which also restarts i at 0).  With this one unit the NTT
// system performs every element-wise step of the univariate ZeroCheck:
//   * f = g1*g2 + g3 on the coset and the division by z_H: on a coset g*H of
//     size N, z_H(x) = x^N - 1 is the constant g^N - 1, so the division is a
//     multiplication by its inverse (s0 = 1/(g^N - 1), ratio = 1);
//   * the coset shift and 1/N scaling between an iNTT and a coset NTT
//     (s0 = 1/N, ratio = g) and back (s0 = 1/N, ratio = 1/g);
//   * the inter-step twiddles of a four-step NTT (s0 = 1, ratio = omega^k).
// The paper names these element-wise multiplications/divisions and says they
// are pipelined with the transforms; the geometric scale generator and the
// use of a precomputed inverse instead of a divider are this design's choice.
//
// Timing: y is registered, out_valid follows in_valid by one cycle.
module ew_unit
  import zk_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic cfg_load,
  input  logic cfg_fma,      // 1: FMA, 0: SCALE
  input  fe_t  cfg_s0,
  input  fe_t  cfg_ratio,
  input  logic in_valid,
  input  fe_t  a,
  input  fe_t  b,
  input  fe_t  c,
  output logic out_valid,
  output fe_t  y
);
  logic fma_q;
  fe_t  s_q, ratio_q;
  fe_t  ab, abc, lhs, prod, s_next;

  mod_mul u_ab   (.a(a),   .b(b),       .y(ab));
  mod_add u_abc  (.a(ab),  .b(c),       .sub(1'b0), .y(abc));
  mod_mul u_scl  (.a(lhs), .b(s_q),     .y(prod));
  mod_mul u_geo  (.a(s_q), .b(ratio_q), .y(s_next));

  assign lhs = fma_q ? abc : a;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fma_q     <= 1'b0;
      s_q       <= fe_t'(1);
      ratio_q   <= fe_t'(1);
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid && !cfg_load;
      if (cfg_load) begin
        fma_q   <= cfg_fma;
        s_q     <= cfg_s0;
        ratio_q <= cfg_ratio;
      end else if (in_valid) begin
        y   <= prod;
        s_q <= s_next;
      end
    end
  end
endmodule
