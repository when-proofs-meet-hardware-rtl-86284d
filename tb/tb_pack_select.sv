// tb_pack_select: random lane configurations; checks that every lane input
// carries the constant 1, the Tmp MLE word or the chosen slot's extensions
// as its selector says, at every evaluation point.
module tb_pack_select;
  import zk_pkg::*;
  import tb_field_pkg::*;
  localparam int NS = 6, NL = 4, NF = 4, NP = 4;
  int checks = 0, failures = 0;
  factor_sel_t [NL-1:0][NF-1:0] cfg;
  fe_t [NS-1:0][NP-1:0] ext;
  fe_t [NP-1:0] tmp;
  fe_t [NL-1:0][NF-1:0][NP-1:0] lane_in;
  pack_select #(.NSLOT(NS), .NLANE(NL), .NFAC(NF), .NPTS(NP)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 100; it++) begin
      for (int s = 0; s < NS; s++) for (int x = 0; x < NP; x++) ext[s][x] = frand();
      for (int x = 0; x < NP; x++) tmp[x] = frand();
      for (int l = 0; l < NL; l++) for (int f = 0; f < NF; f++) begin
        int k;
        k = $urandom_range(2);
        cfg[l][f].kind = (k == 0) ? SEL_ONE : (k == 1) ? SEL_TMP : SEL_MLE;
        cfg[l][f].slot = 3'($urandom_range(NS - 1));
      end
      #1;
      for (int l = 0; l < NL; l++) for (int f = 0; f < NF; f++) for (int x = 0; x < NP; x++) begin
        fe_t ex;
        ex = (cfg[l][f].kind == SEL_ONE) ? fe_t'(1) :
             (cfg[l][f].kind == SEL_TMP) ? tmp[x] : ext[cfg[l][f].slot][x];
        checks++;
        if (lane_in[l][f][x] !== ex) begin failures++; $display("FAIL l%0d f%0d x%0d", l, f, x); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
