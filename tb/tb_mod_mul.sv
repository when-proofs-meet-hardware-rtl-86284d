// tb_mod_mul: checks the Barrett modular multiplier against a % reference
// on random operands and on the extremes (0, 1, p-1, large squares).
module tb_mod_mul;
  import zk_pkg::*;
  import tb_field_pkg::*;
  int checks = 0, failures = 0;
  fe_t a, b, y;
  mod_mul dut (.a, .b, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(fe_t ta, fe_t tb_);
    fe_t exp;
    a = ta; b = tb_;
    #1;
    exp = fmul(ta, tb_);
    checks++;
    if (y !== exp) begin
      failures++;
      $display("FAIL a=%h b=%h y=%h exp=%h", ta, tb_, y, exp);
    end
  endtask

  initial begin
    fe_t pm1 = MODULUS - fe_t'(1);
    check(pm1, pm1); check(pm1, fe_t'(1)); check('0, pm1); check(fe_t'(2), pm1);
    check(MODULUS >> 1, MODULUS >> 1);
    for (int i = 0; i < 600; i++) check(frand(), frand());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
