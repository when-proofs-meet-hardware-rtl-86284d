// ext_engine: Extension Engine of a SumCheck PE.
//
// Given an MLE's values at X_i = 0 and X_i = 1, produces its values at
// X_i = 0 .. NPTS-1 using only modular additions: with d = e1 - e0,
// v(0) = e0, v(1) = e1, v(k+1) = v(k) + d.  This is one subtractor and a
// chain of NPTS-2 adders, the structure drawn in the paper (one minus, then
// adders, outputs at X_i = 0-3 for the default NPTS = 4).  Combinational.
// v[0] and v[1] are the inputs passed straight through, so they carry no
// logic of their own; they are outputs so that every point has one port.
module ext_engine
  import zk_pkg::*;
#(
  parameter int unsigned NPTS = 4
) (
  input  fe_t             e0,
  input  fe_t             e1,
  output fe_t [NPTS-1:0]  v
);
  fe_t d;
  mod_add u_d (.a(e1), .b(e0), .sub(1'b1), .y(d));

  assign v[0] = e0;
  assign v[1] = e1;
  for (genvar k = 2; k < NPTS; k++) begin : g_chain
    mod_add u_a (.a(v[k-1]), .b(d), .sub(1'b0), .y(v[k]));
  end
endmodule
