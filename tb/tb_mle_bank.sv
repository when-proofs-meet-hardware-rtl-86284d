// tb_mle_bank: fills a bank through the external port, reads it on all
// four read ports and the external read port, writes through both PE write
// ports and checks every word and the one-cycle read latency.
module tb_mle_bank;
  import zk_pkg::*;
  import tb_field_pkg::*;
  localparam int L = 5, N = 32;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [3:0][L-1:0] rd_addr = '0;
  fe_t [3:0] rd_data;
  logic [1:0] wr_en = '0;
  logic [1:0][L-1:0] wr_addr = '0;
  fe_t [1:0] wr_data = '0;
  logic ext_wr_en = 0;
  logic [L-1:0] ext_wr_addr = '0, ext_rd_addr = '0;
  fe_t ext_wr_data = '0, ext_rd_data;
  fe_t model [N];
  mle_bank #(.LOGN_MAX(L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic readall();
    for (int i = 0; i < N; i++) begin
      logic [3:0][L-1:0] a;
      for (int p = 0; p < 4; p++) a[p] = L'(i + 7 * p);
      rd_addr = a; ext_rd_addr = L'(N - 1 - i);
      @(negedge clk);
      for (int p = 0; p < 4; p++) begin
        checks++;
        if (rd_data[p] !== model[a[p]]) begin failures++; $display("FAIL port %0d addr %0d", p, a[p]); end
      end
      checks++;
      if (ext_rd_data !== model[N - 1 - i]) begin failures++; $display("FAIL ext rd %0d", N - 1 - i); end
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      model[i] = frand();
      @(negedge clk); ext_wr_en = 1; ext_wr_addr = L'(i); ext_wr_data = model[i];
    end
    @(negedge clk); ext_wr_en = 0;
    readall();
    for (int i = 0; i < N / 2; i++) begin
      @(negedge clk);
      wr_en = 2'b11; wr_addr[0] = L'(i); wr_addr[1] = L'(i + N / 2);
      wr_data[0] = frand(); wr_data[1] = frand();
      model[i] = wr_data[0]; model[i + N / 2] = wr_data[1];
    end
    @(negedge clk); wr_en = '0;
    readall();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
