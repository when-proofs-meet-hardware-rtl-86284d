// ntt_butterfly: Cooley-Tukey radix-2 butterfly of the NTT system.
//
// Multiplies input b by the twiddle w and forms
//   x = a + w*b,   y = a - w*b   (mod p)
// i.e. one modular multiplier followed by a modular adder and subtractor,
// as drawn in the butterfly boxes of the NTT architecture figure.  The
// results are registered: a butterfly has a latency of one cycle and accepts
// a new operand pair every cycle (in_valid -> out_valid one cycle later).
module ntt_butterfly
  import zk_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fe_t  a,
  input  fe_t  b,
  input  fe_t  w,
  output logic out_valid,
  output fe_t  x,
  output fe_t  y
);
  fe_t wb, sum, dif;

  mod_mul u_mul (.a(b),   .b(w),  .y(wb));
  mod_add u_add (.a(a),   .b(wb), .sub(1'b0), .y(sum));
  mod_add u_sub (.a(a),   .b(wb), .sub(1'b1), .y(dif));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      x         <= '0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        x <= sum;
        y <= dif;
      end
    end
  end
endmodule
