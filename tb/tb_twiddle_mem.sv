// tb_twiddle_mem: loads powers of a root of unity, then reads them back on
// all read ports at once and checks value and one-cycle read latency.
module tb_twiddle_mem;
  import zk_pkg::*;
  import tb_field_pkg::*;
  localparam int LOGN_MAX = 6, NRD = 4, AW = LOGN_MAX - 1;
  int checks = 0, failures = 0;
  logic clk = 0, wr_en = 0;
  logic [AW-1:0] wr_addr;
  fe_t wr_data;
  logic [NRD-1:0][AW-1:0] rd_addr;
  fe_t [NRD-1:0] rd_data;
  fe_t ref_tw [2**AW];
  twiddle_mem #(.LOGN_MAX(LOGN_MAX), .NRD(NRD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fe_t w = root_of_unity(LOGN_MAX), acc = fe_t'(1);
    rd_addr = '0; wr_addr = '0; wr_data = '0;
    for (int k = 0; k < 2**AW; k++) begin
      ref_tw[k] = acc; acc = fmul(acc, w);
      @(negedge clk); wr_en = 1; wr_addr = AW'(k); wr_data = ref_tw[k];
    end
    @(negedge clk); wr_en = 0;
    for (int it = 0; it < 100; it++) begin
      logic [NRD-1:0][AW-1:0] sent;
      for (int p = 0; p < NRD; p++) rd_addr[p] = AW'($urandom);
      sent = rd_addr;
      @(negedge clk);
      for (int p = 0; p < NRD; p++) begin
        checks++;
        if (rd_data[p] !== ref_tw[sent[p]]) begin
          failures++; $display("FAIL port %0d addr %0d", p, sent[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
