// mle_crossbar: bank-to-PE crossbar of the SumCheck system.
//
// Connects NSLOT MLE-update slots to NBANK banks.  Slot k is bound to bank
// sel[k] (when slot_en[k]): it receives that bank's four read words and its
// two write-back words and enables go to that bank.  Bindings are set per
// workload, so any bank can hold any polynomial (including the eq_r table
// built on chip).  Purely combinational.  Two enabled slots must not share
// a bank (asserted); a bank bound to no slot sees no writes.
module mle_crossbar
  import zk_pkg::*;
#(
  parameter int unsigned NSLOT = 6,
  parameter int unsigned NBANK = 6,
  localparam int unsigned SW   = $clog2(NBANK)
) (
  input  logic [NSLOT-1:0][SW-1:0]   sel,
  input  logic [NSLOT-1:0]           slot_en,
  // read direction
  input  fe_t  [NBANK-1:0][3:0]      bank_rd,
  output fe_t  [NSLOT-1:0][3:0]      slot_rd,
  // write direction
  input  logic [NSLOT-1:0][1:0]      slot_wr_en,
  input  fe_t  [NSLOT-1:0][1:0]      slot_wr,
  output logic [NBANK-1:0][1:0]      bank_wr_en,
  output fe_t  [NBANK-1:0][1:0]      bank_wr
);
  always_comb begin
    for (int k = 0; k < NSLOT; k++) slot_rd[k] = bank_rd[sel[k]];
    for (int b = 0; b < NBANK; b++) begin
      bank_wr_en[b] = '0;
      bank_wr[b]    = '0;
      for (int k = 0; k < NSLOT; k++) begin
        if (slot_en[k] && sel[k] == SW'(b)) begin
          bank_wr_en[b] = slot_wr_en[k];
          bank_wr[b]    = slot_wr[k];
        end
      end
    end
  end

  for (genvar a = 0; a < NSLOT; a++) begin : g_chk_a
    for (genvar c = a + 1; c < NSLOT; c++) begin : g_chk_c
      always_comb assert (!(slot_en[a] && slot_en[c] && sel[a] == sel[c]));
    end
  end
endmodule
