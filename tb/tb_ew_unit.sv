// tb_ew_unit: streams random operands through the element-wise unit in
// both modes and checks y_i = (a_i*b_i + c_i) * s0*ratio^i (FMA) and
// y_i = a_i * s0*ratio^i (SCALE), including a reload of the scale
// generator mid-way and bubbles in the input stream.
module tb_ew_unit;
  import zk_pkg::*;
  import tb_field_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, cfg_load = 0, cfg_fma = 0, in_valid = 0, out_valid;
  fe_t cfg_s0, cfg_ratio, a, b, c, y;
  fe_t exp_q[$];
  ew_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    fe_t e;
    e = exp_q.pop_front();
    checks++;
    if (y !== e) begin failures++; $display("FAIL y=%h exp=%h", y, e); end
  end

  task automatic run(logic fma, int cnt);
    fe_t s0, ratio, s;
    s0 = frand(); ratio = frand(); s = s0;
    @(negedge clk); cfg_load = 1; cfg_fma = fma; cfg_s0 = s0; cfg_ratio = ratio;
    @(negedge clk); cfg_load = 0;
    for (int i = 0; i < cnt; i++) begin
      if ($urandom_range(3) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; a = frand(); b = frand(); c = frand();
      exp_q.push_back(fma ? fmul(fadd(fmul(a, b), c), s) : fmul(a, s));
      s = fmul(s, ratio);
      @(negedge clk);
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    a = '0; b = '0; c = '0; cfg_s0 = '0; cfg_ratio = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1, 100); run(0, 100); run(1, 50);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
