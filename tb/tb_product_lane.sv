// tb_product_lane: random factor sets; checks the four-factor product at
// every point one cycle later, and that it leaves on the accumulator or
// the Tmp MLE output as to_tmp selects.
module tb_product_lane;
  import zk_pkg::*;
  import tb_field_pkg::*;
  localparam int NP = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, to_tmp = 0, acc_valid, tmp_valid;
  fe_t [3:0][NP-1:0] f = '0;
  fe_t [NP-1:0] prod;
  fe_t [NP-1:0] q[$];
  logic qt[$];
  product_lane #(.NPTS(NP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && (acc_valid || tmp_valid)) begin
    fe_t [NP-1:0] e;
    logic t;
    e = q.pop_front(); t = qt.pop_front();
    checks++;
    if (prod !== e || tmp_valid !== t || acc_valid !== !t) begin failures++; $display("FAIL product t=%0t tmpv=%0d accv=%0d exp_t=%0d qsize=%0d", $time, tmp_valid, acc_valid, t, q.size()); end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      fe_t [NP-1:0] e;
      @(negedge clk);
      in_valid = ($urandom_range(4) != 0); to_tmp = $urandom_range(1);
      for (int k = 0; k < 4; k++) for (int x = 0; x < NP; x++) f[k][x] = frand();
      for (int x = 0; x < NP; x++) e[x] = fmul(fmul(f[0][x], f[1][x]), fmul(f[2][x], f[3][x]));
      if (in_valid) begin q.push_back(e); qt.push_back(to_tmp); end
    end
    @(negedge clk); in_valid = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
