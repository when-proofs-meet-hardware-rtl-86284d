// tb_acc_regs: accumulates random products with random lane enables over
// several rounds (clear between rounds) and checks the lane-summed outputs
// against a running reference sum.
module tb_acc_regs;
  import zk_pkg::*;
  import tb_field_pkg::*;
  localparam int NL = 4, NP = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [NL-1:0] add_en = '0;
  fe_t [NL-1:0][NP-1:0] prod = '0;
  fe_t [NP-1:0] g, ref_g;
  acc_regs #(.NLANE(NL), .NPTS(NP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 5; r++) begin
      @(negedge clk); clear = 1; add_en = '0;
      ref_g = '0;
      @(negedge clk); clear = 0;
      for (int i = 0; i < 40; i++) begin
        add_en = NL'($urandom);
        for (int l = 0; l < NL; l++) for (int x = 0; x < NP; x++) begin
          prod[l][x] = frand();
          if (add_en[l]) ref_g[x] = fadd(ref_g[x], prod[l][x]);
        end
        @(negedge clk);
      end
      add_en = '0;
      @(negedge clk);
      for (int x = 0; x < NP; x++) begin
        checks++;
        if (g[x] !== ref_g[x]) begin failures++; $display("FAIL round %0d point %0d", r, x); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
