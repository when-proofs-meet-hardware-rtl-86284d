// mod_add: modular adder/subtractor over the zk_pkg prime field.
//
// Computes y = a + b mod p when sub = 0 and y = a - b mod p when sub = 1.
// Both inputs must be canonical (< p); the output is canonical.  It is the
// "Modular Adder" primitive of the design: one wide add (or subtract)
// followed by a single conditional correction by p.  Purely combinational;
// the blocks that use it register its output where their pipelines need it.
module mod_add
  import zk_pkg::*;
(
  input  fe_t  a,
  input  fe_t  b,
  input  logic sub,
  output fe_t  y
);
  logic [FE_W:0] sum, sum_red;
  logic [FE_W:0] diff, diff_fix;

  always_comb begin
    sum      = {1'b0, a} + {1'b0, b};
    sum_red  = sum - {1'b0, MODULUS};
    diff     = {1'b0, a} - {1'b0, b};
    diff_fix = diff + {1'b0, MODULUS};
    if (sub) y = diff[FE_W] ? diff_fix[FE_W-1:0] : diff[FE_W-1:0];
    else     y = sum_red[FE_W] ? sum[FE_W-1:0] : sum_red[FE_W-1:0];
  end
endmodule
