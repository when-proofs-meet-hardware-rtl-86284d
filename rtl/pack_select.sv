// pack_select: Pack-and-Select network of a SumCheck PE.
//
// Feeds every product-lane input.  For lane l and factor f, cfg[l][f]
// chooses the constant 1 (unused factor), the Tmp MLE word (a partial
// product from an earlier pass) or the extensions of MLE slot
// cfg[l][f].slot; the chosen source supplies all NPTS evaluation points at
// once.  This is how one fixed array of lanes computes any sum of products
// of the loaded MLEs (a "programmable" SumCheck).  Combinational.
module pack_select
  import zk_pkg::*;
#(
  parameter int unsigned NSLOT = 6,
  parameter int unsigned NLANE = 4,
  parameter int unsigned NFAC  = 4,
  parameter int unsigned NPTS  = 4
) (
  input  factor_sel_t [NLANE-1:0][NFAC-1:0]   cfg,
  input  fe_t         [NSLOT-1:0][NPTS-1:0]   ext,
  input  fe_t         [NPTS-1:0]              tmp,
  output fe_t         [NLANE-1:0][NFAC-1:0][NPTS-1:0] lane_in
);
  always_comb begin
    for (int l = 0; l < NLANE; l++) begin
      for (int f = 0; f < NFAC; f++) begin
        for (int x = 0; x < NPTS; x++) begin
          unique case (cfg[l][f].kind)
            SEL_TMP: lane_in[l][f][x] = tmp[x];
            SEL_MLE: lane_in[l][f][x] = (int'(cfg[l][f].slot) < NSLOT) ?
                                        ext[cfg[l][f].slot][x] : fe_t'(1);
            default: lane_in[l][f][x] = fe_t'(1);
          endcase
        end
      end
    end
  end
endmodule
