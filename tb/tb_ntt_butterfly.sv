// tb_ntt_butterfly: drives random (a, b, w) triples back to back and checks
// x = a + w*b, y = a - w*b one cycle later (latency and throughput).
module tb_ntt_butterfly;
  import zk_pkg::*;
  import tb_field_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fe_t a, b, w, x, y;
  fe_t ea[$], eb[$];
  ntt_butterfly dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '0; b = '0; w = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      in_valid = 1; a = frand(); b = frand(); w = frand();
      ea.push_back(fadd(a, fmul(w, b)));
      eb.push_back(fsub(a, fmul(w, b)));
    end
    @(negedge clk) in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (ea.size() != 0) begin failures++; $display("FAIL %0d results missing", ea.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result must appear exactly one cycle after its operands
  logic in_valid_d = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      fe_t ex, ey;
      ex = ea.pop_front();
      ey = eb.pop_front();
      checks++;
      if (x !== ex || y !== ey) begin failures++; $display("FAIL x=%h exp %h", x, ex); end
    end
    checks++;
    if (out_valid !== in_valid_d) begin failures++; $display("FAIL latency"); end
    in_valid_d <= in_valid;
  end
endmodule
