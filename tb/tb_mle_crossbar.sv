// tb_mle_crossbar: random bank-to-slot bindings (a random permutation
// with some slots disabled); checks that every slot reads its bank's words
// and that write enables and data reach exactly the bound bank.
module tb_mle_crossbar;
  import zk_pkg::*;
  import tb_field_pkg::*;
  localparam int NS = 6, NB = 6, SW = 3;
  int checks = 0, failures = 0;
  logic [NS-1:0][SW-1:0] sel;
  logic [NS-1:0] slot_en;
  fe_t [NB-1:0][3:0] bank_rd;
  fe_t [NS-1:0][3:0] slot_rd;
  logic [NS-1:0][1:0] slot_wr_en;
  fe_t [NS-1:0][1:0] slot_wr;
  logic [NB-1:0][1:0] bank_wr_en;
  fe_t [NB-1:0][1:0] bank_wr;
  mle_crossbar #(.NSLOT(NS), .NBANK(NB)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 50; it++) begin
      int perm [NS];
      for (int k = 0; k < NS; k++) perm[k] = k;
      perm.shuffle();
      for (int k = 0; k < NS; k++) begin
        sel[k] = SW'(perm[k]); slot_en[k] = ($urandom_range(3) != 0);
        slot_wr_en[k] = 2'($urandom); slot_wr[k][0] = frand(); slot_wr[k][1] = frand();
      end
      for (int b = 0; b < NB; b++) for (int p = 0; p < 4; p++) bank_rd[b][p] = frand();
      #1;
      for (int k = 0; k < NS; k++) begin
        checks++;
        if (slot_rd[k] !== bank_rd[perm[k]]) begin failures++; $display("FAIL rd slot %0d", k); end
      end
      for (int b = 0; b < NB; b++) begin
        logic [1:0] een;
        fe_t [1:0] ed;
        een = '0; ed = '0;
        for (int k = 0; k < NS; k++) if (perm[k] == b && slot_en[k]) begin een = slot_wr_en[k]; ed = slot_wr[k]; end
        checks++;
        if (bank_wr_en[b] !== een || (een != 0 && bank_wr[b] !== ed)) begin
          failures++; $display("FAIL wr bank %0d", b);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
