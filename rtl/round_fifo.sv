// round_fifo: output FIFO of the SumCheck system ("To FIFO").
//
// Queues the round polynomials G_i(0..NPTS-1) for the host, which hashes
// them into the next challenge.  DEPTH entries, valid/ready on both sides,
// first-word-fall-through output.  A push while full is dropped and is a
// protocol error (asserted).
//
// The source architecture drives its FIFO from the MLE update outputs, as a
// write-back path for updated tables.  Here updated tables are written back
// in place inside the banks, so this design uses the FIFO for the round
// polynomials instead.
module round_fifo
  import zk_pkg::*;
#(
  parameter int unsigned NPTS  = 4,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            push,
  input  fe_t [NPTS-1:0]  push_data,
  output logic            full,
  output logic            pop_valid,
  input  logic            pop_ready,
  output fe_t [NPTS-1:0]  pop_data
);
  fe_t [NPTS-1:0] mem [DEPTH];
  logic [AW-1:0]  wp, rp;
  logic [AW:0]    cnt;

  assign full      = (cnt == (AW + 1)'(DEPTH));
  assign pop_valid = (cnt != '0);
  assign pop_data  = mem[rp];

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop_valid && pop_ready;

  always_ff @(posedge clk) if (do_push) mem[wp] <= push_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW + 1)'(do_push) - (AW + 1)'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
endmodule
