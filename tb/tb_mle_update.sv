// tb_mle_update: drives random 4-entry groups and challenges; checks the
// folded pair e0 = p0 + a(p1-p0), e1 = p2 + a(p3-p2) (update mode) and the
// pass-through pair (p0, p1) (round-1 mode), one cycle after the input.
module tb_mle_update;
  import zk_pkg::*;
  import tb_field_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, upd = 0, out_valid;
  fe_t alpha = '0, e0, e1;
  fe_t [3:0] p = '0;
  fe_t q0[$], q1[$];
  mle_update dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    fe_t x0, x1;
    x0 = q0.pop_front(); x1 = q1.pop_front();
    checks++;
    if (e0 !== x0 || e1 !== x1) begin failures++; $display("FAIL e0=%h exp %h", e0, x0); end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      in_valid = 1; upd = (i % 3 != 0); alpha = frand();
      for (int k = 0; k < 4; k++) p[k] = frand();
      if (upd) begin
        q0.push_back(fadd(p[0], fmul(alpha, fsub(p[1], p[0]))));
        q1.push_back(fadd(p[2], fmul(alpha, fsub(p[3], p[2]))));
      end else begin
        q0.push_back(p[0]); q1.push_back(p[1]);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (q0.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
