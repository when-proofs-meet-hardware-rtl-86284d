// mod_mul: modular multiplier over the zk_pkg prime field.
//
// y = a * b mod p for canonical inputs.  The 510-bit product is reduced with
// Barrett reduction: q = floor(floor(t / 2^254) * MU / 2^256) estimates
// floor(t / p) from below by at most 2, so at most two conditional
// subtractions of p finish the job.  MU = floor(2^510 / p) is a constant
// computed at elaboration time.
//
// Timing: combinational.  The paper's multiplier is a pipelined 255-bit unit
// of fixed area/power; its pipeline depth is not given, so this model leaves
// pipelining to the enclosing blocks, which register its result.
module mod_mul
  import zk_pkg::*;
(
  input  fe_t a,
  input  fe_t b,
  output fe_t y
);
  localparam int unsigned PW = 2 * FE_W;                  // 510-bit product

  // floor(2^510 / p), a 256-bit constant.
  localparam logic [PW:0] TWO_PW = {1'b1, {PW{1'b0}}};
  localparam logic [FE_W:0] MU = (FE_W + 1)'(TWO_PW / {{(PW + 1 - FE_W){1'b0}}, MODULUS});

  logic [PW-1:0]        t;
  logic [FE_W+1:0]      t_hi;       // t >> 254, at most 256 bits
  logic [2*FE_W+3:0]    qmu;        // t_hi * MU
  logic [FE_W+1:0]      q;
  logic [PW+1:0]        qp;
  logic [FE_W+2:0]      r0, r1, r2;

  always_comb begin
    t    = PW'(a) * PW'(b);
    t_hi = (FE_W + 2)'(t >> (FE_W - 1));
    qmu  = (2 * FE_W + 4)'(t_hi) * (2 * FE_W + 4)'(MU);
    q    = (FE_W + 2)'(qmu >> (FE_W + 1));
    qp   = (PW + 2)'(q) * (PW + 2)'(MODULUS);
    r0   = (FE_W + 3)'((PW + 2)'(t) - qp);
    r1   = (r0 >= (FE_W + 3)'(MODULUS)) ? r0 - (FE_W + 3)'(MODULUS) : r0;
    r2   = (r1 >= (FE_W + 3)'(MODULUS)) ? r1 - (FE_W + 3)'(MODULUS) : r1;
    y    = r2[FE_W-1:0];
  end
endmodule
