// tb_build_mle: builds eq_r for several n with a bank modelled in the
// testbench and checks every entry against the direct product
// eq_r(b) = prod_i (b_i ? r_i : 1 - r_i), x_1 = most significant bit,
// and the build time (2^n + n + 1 cycles plus the done pulse).
module tb_build_mle;
  import zk_pkg::*;
  import tb_field_pkg::*;
  localparam int L = 6, LNW = 3, RIW = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, r_wr_en = 0, start = 0, busy, done;
  logic [RIW-1:0] r_wr_idx = '0;
  fe_t r_wr_data = '0, rd_data;
  logic [LNW-1:0] n = '0;
  logic [L-1:0] rd_addr;
  logic [1:0] wr_en;
  logic [1:0][L-1:0] wr_addr;
  fe_t [1:0] wr_data;
  fe_t bank [2**L];
  fe_t r [L];
  build_mle #(.LOGN_MAX(L)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    rd_data <= bank[rd_addr];
    for (int p = 0; p < 2; p++) if (wr_en[p]) bank[wr_addr[p]] <= wr_data[p];
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int nn = L; nn >= 1; nn -= 2) begin
      int cyc;
      for (int i = 0; i < nn; i++) begin
        r[i] = frand();
        @(negedge clk); r_wr_en = 1; r_wr_idx = RIW'(i); r_wr_data = r[i];
      end
      @(negedge clk); r_wr_en = 0; start = 1; n = LNW'(nn);
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc > (1 << nn) + nn + 3) begin failures++; $display("FAIL build took %0d cycles", cyc); end
      for (int b = 0; b < (1 << nn); b++) begin
        fe_t e;
        e = fe_t'(1);
        for (int i = 1; i <= nn; i++)
          e = fmul(e, ((b >> (nn - i)) & 1) ? r[i-1] : fsub(fe_t'(1), r[i-1]));
        checks++;
        if (bank[b] !== e) begin failures++; $display("FAIL n=%0d entry %0d", nn, b); end
      end
      $display("n=%0d built in %0d cycles", nn, cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
