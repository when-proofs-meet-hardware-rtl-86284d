// tb_field_pkg: reference field arithmetic for the testbenches.
//
// Straightforward big-integer models (a*b % p with the simulator's wide
// arithmetic, square-and-multiply powers, Fermat inverses) used to compute
// expected values independently of the RTL's reduction logic.
package tb_field_pkg;
  import zk_pkg::*;

  function automatic fe_t fadd(fe_t a, fe_t b);
    logic [FE_W:0] s = {1'b0, a} + {1'b0, b};
    return fe_t'(s % {1'b0, MODULUS});
  endfunction

  function automatic fe_t fsub(fe_t a, fe_t b);
    return fadd(a, MODULUS - b);
  endfunction

  function automatic fe_t fmul(fe_t a, fe_t b);
    logic [2*FE_W-1:0] t = (2*FE_W)'(a) * (2*FE_W)'(b);
    return fe_t'(t % (2*FE_W)'(MODULUS));
  endfunction

  function automatic fe_t fpow(fe_t a, logic [FE_W-1:0] e);
    fe_t r = fe_t'(1);
    fe_t x = a;
    for (int i = 0; i < FE_W; i++) begin
      if (e[i]) r = fmul(r, x);
      x = fmul(x, x);
    end
    return r;
  endfunction

  function automatic fe_t finv(fe_t a);
    return fpow(a, MODULUS - fe_t'(2));
  endfunction

  // Primitive 2^logn-th root of unity: GENERATOR^((p-1)/2^logn).
  function automatic fe_t root_of_unity(int logn);
    return fpow(GENERATOR, (MODULUS - fe_t'(1)) >> logn);
  endfunction

  // Uniform-ish random field element.
  function automatic fe_t frand();
    logic [FE_W+31:0] r;
    for (int i = 0; i < (FE_W + 32) / 32; i++) r[i*32 +: 32] = $urandom;
    return fe_t'(r % (FE_W + 32)'(MODULUS));
  endfunction
endpackage
