// tb_mod_add: checks the modular adder/subtractor against a reference
// (a +/- b reduced with the % operator) on random and edge-case operands.
module tb_mod_add;
  import zk_pkg::*;
  import tb_field_pkg::*;
  int checks = 0, failures = 0;
  fe_t a, b, y;
  logic sub;
  mod_add dut (.a, .b, .sub, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(fe_t ta, fe_t tb_, logic ts);
    fe_t exp;
    a = ta; b = tb_; sub = ts;
    #1;
    exp = ts ? fsub(ta, tb_) : fadd(ta, tb_);
    checks++;
    if (y !== exp) begin
      failures++;
      $display("FAIL a=%h b=%h sub=%0d y=%h exp=%h", ta, tb_, ts, y, exp);
    end
  endtask

  initial begin
    fe_t pm1 = MODULUS - fe_t'(1);
    check(pm1, pm1, 0); check(pm1, fe_t'(1), 0); check('0, '0, 0);
    check('0, fe_t'(1), 1); check('0, pm1, 1); check(pm1, pm1, 1);
    for (int i = 0; i < 400; i++) check(frand(), frand(), i[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
