// tb_ntt_core: runs forward transforms of several sizes on the core, with
// the source and sink buffers modelled in the testbench, and compares the
// bit-reversed output with a direct O(N^2) DFT.  Also checks the cycle
// count: log_n stages of N/(2*NBF) butterfly steps plus a 2-cycle drain.
module tb_ntt_core;
  import zk_pkg::*;
  import tb_field_pkg::*;
  localparam int LOGN_MAX = 6, NBF = 4, RAW = 4, TW_AW = 5, LNW = 3;
  localparam int NMAX = 2**LOGN_MAX;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done, src_free;
  logic [LNW-1:0] log_n;
  logic tw_wr_en = 0;
  logic [TW_AW-1:0] tw_wr_addr;
  fe_t tw_wr_data;
  logic [1:0][RAW-1:0] src_rd_row, snk_wr_row;
  fe_t [1:0][NBF-1:0] src_rd_data, snk_wr_data;
  logic [1:0] snk_wr_en;
  fe_t src [NMAX], snk [NMAX];
  int free_seen;

  ntt_core #(.LOGN_MAX(LOGN_MAX), .NBF(NBF)) dut (.*);
  always #5 clk = ~clk;

  // source buffer model: synchronous row reads
  always @(posedge clk) begin
    for (int p = 0; p < 2; p++)
      for (int l = 0; l < NBF; l++) src_rd_data[p][l] <= src[src_rd_row[p]*NBF + l];
    for (int p = 0; p < 2; p++)
      if (snk_wr_en[p]) for (int l = 0; l < NBF; l++) snk[snk_wr_row[p]*NBF + l] <= snk_wr_data[p][l];
    if (src_free) free_seen++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int brev(int v, int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) if (v & (1 << i)) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  initial begin
    fe_t om = root_of_unity(LOGN_MAX), acc = fe_t'(1);
    log_n = '0; tw_wr_addr = '0; tw_wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NMAX / 2; k++) begin
      @(negedge clk); tw_wr_en = 1; tw_wr_addr = TW_AW'(k); tw_wr_data = acc;
      acc = fmul(acc, om);
    end
    @(negedge clk); tw_wr_en = 0;
    for (int ln = LOGN_MAX; ln >= 3; ln--) begin
      int n, cyc;
      fe_t w;
      n = 1 << ln; cyc = 0; w = root_of_unity(ln);
      for (int i = 0; i < n; i++) src[i] = frand();
      free_seen = 0;
      @(negedge clk); start = 1; log_n = LNW'(ln);
      @(negedge clk); start = 0;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc > ln * (n / (2 * NBF) + 2) + 1) begin
        failures++; $display("FAIL cycles %0d for N=%0d", cyc, n);
      end
      checks++;
      if (free_seen != 1) begin failures++; $display("FAIL src_free pulses %0d", free_seen); end
      for (int k = 0; k < n; k++) begin
        fe_t x, wk, p;
        x = '0; wk = fpow(w, fe_t'(k)); p = fe_t'(1);
        for (int i = 0; i < n; i++) begin x = fadd(x, fmul(src[i], p)); p = fmul(p, wk); end
        checks++;
        if (snk[brev(k, ln)] !== x) begin
          failures++; if (failures < 5) $display("FAIL N=%0d k=%0d", n, k);
        end
      end
      $display("N=%0d done in %0d cycles", n, cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
