// tb_ext_engine: checks that the extension engine returns the linear
// polynomial through (0, e0), (1, e1) evaluated at X = 0..NPTS-1, i.e.
// e0 + X*(e1 - e0), for random pairs and for NPTS = 4 and 6.
module tb_ext_engine;
  import zk_pkg::*;
  import tb_field_pkg::*;
  int checks = 0, failures = 0;
  fe_t e0, e1;
  fe_t [3:0] v4;
  fe_t [5:0] v6;
  ext_engine #(.NPTS(4)) dut4 (.e0, .e1, .v(v4));
  ext_engine #(.NPTS(6)) dut6 (.e0, .e1, .v(v6));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 200; i++) begin
      e0 = frand(); e1 = frand();
      #1;
      for (int x = 0; x < 6; x++) begin
        fe_t ex;
        ex = fadd(e0, fmul(fe_t'(x), fsub(e1, e0)));
        checks++;
        if (v6[x] !== ex) begin failures++; $display("FAIL X=%0d", x); end
        if (x < 4) begin
          checks++;
          if (v4[x] !== ex) begin failures++; $display("FAIL4 X=%0d", x); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
