// tb_tmp_mle: writes random NPTS-wide words, reads them back in another
// order and checks data and the one-cycle read latency.
module tb_tmp_mle;
  import zk_pkg::*;
  import tb_field_pkg::*;
  localparam int L = 5, NP = 4, D = 16;
  int checks = 0, failures = 0;
  logic clk = 0, wr_en = 0;
  logic [L-2:0] wr_addr = '0, rd_addr = '0;
  fe_t [NP-1:0] wr_data = '0, rd_data;
  fe_t [NP-1:0] model [D];
  tmp_mle #(.LOGN_MAX(L), .NPTS(NP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = 4'(i);
      for (int x = 0; x < NP; x++) wr_data[x] = frand();
      model[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < D; i++) begin
      rd_addr = 4'((i * 5) % D);
      @(negedge clk);
      checks++;
      if (rd_data !== model[(i * 5) % D]) begin failures++; $display("FAIL %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
