// tb_round_fifo: pushes and pops with random timing, including filling the
// FIFO completely, and checks order, data, full and valid.
module tb_round_fifo;
  import zk_pkg::*;
  import tb_field_pkg::*;
  localparam int NP = 4, D = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, push = 0, full, pop_valid, pop_ready = 0;
  fe_t [NP-1:0] push_data = '0, pop_data;
  fe_t [NP-1:0] model[$];
  int fulls = 0;
  round_fifo #(.NPTS(NP), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (pop_valid !== (model.size() != 0) || full !== (model.size() == D)) begin
      failures++; $display("FAIL flags size=%0d", model.size());
    end
    if (full) fulls++;
    if (pop_valid && pop_ready) begin
      fe_t [NP-1:0] e;
      e = model.pop_front();
      checks++;
      if (pop_data !== e) begin failures++; $display("FAIL data"); end
    end
    if (push && !full) model.push_back(push_data);
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      pop_ready = (i < 100) ? ($urandom_range(3) == 0) : $urandom_range(1);
      push = (model.size() < D) && $urandom_range(1);
      for (int x = 0; x < NP; x++) push_data[x] = frand();
    end
    @(negedge clk); push = 0; pop_ready = 1;
    repeat (D + 2) @(negedge clk);
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
