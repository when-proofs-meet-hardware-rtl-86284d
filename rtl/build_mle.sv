// build_mle: Build MLE unit, constructs the eq_r table.
//
// eq_r(x) = prod_i ((1 - x_i)(1 - r_i) + x_i r_i) over x in {0,1}^n, with
// x_1 the most significant index bit (the variable the first SumCheck round
// binds).  The table is built as a tree, doubling it once per variable:
// starting from T[0] = 1, level k (k = 0..n-1) takes r = r_{n-k} and, for
// every existing entry e = T[j], j < 2^k, writes
//   T[j] = e - e*r   (x = 0 branch),   T[j + 2^k] = e*r   (x = 1 branch).
// One multiplier and one subtractor; one entry per cycle, read through the
// bank's read port and written back through its two write ports.  A bubble
// cycle between levels keeps the read of a level behind the writes of the
// previous one.  Total time 2^n + n + 1 cycles.
//
// The paper says eq_r is built with a tree-based algorithm inside the
// SumCheck system before round 1; this doubling schedule is this design's.
// The challenge vector r is written in by the host (r_1 at index 0).
module build_mle
  import zk_pkg::*;
#(
  parameter int unsigned LOGN_MAX = 17,
  localparam int unsigned LNW     = $clog2(LOGN_MAX + 1),
  localparam int unsigned RIW     = $clog2(LOGN_MAX)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      r_wr_en,
  input  logic [RIW-1:0]            r_wr_idx,
  input  fe_t                       r_wr_data,
  input  logic                      start,
  input  logic [LNW-1:0]            n,
  output logic                      busy,
  output logic                      done,
  output logic [LOGN_MAX-1:0]       rd_addr,
  input  fe_t                       rd_data,
  output logic [1:0]                wr_en,
  output logic [1:0][LOGN_MAX-1:0]  wr_addr,
  output fe_t  [1:0]                wr_data
);
  typedef enum logic [1:0] {B_IDLE, B_INIT, B_RUN, B_GAP} state_e;
  state_e state;

  fe_t r [LOGN_MAX];

  logic [LNW-1:0]       n_q, lvl, lvl1;
  logic [LOGN_MAX-1:0]  j, j1, span1;
  logic                 v1, last_issue, last1;
  fe_t                  r_cur, m, e_minus_m;

  always_ff @(posedge clk) if (r_wr_en) r[r_wr_idx] <= r_wr_data;

  assign r_cur = r[RIW'(n_q - 1'b1 - lvl1)];
  mod_mul u_mul (.a(rd_data), .b(r_cur), .y(m));
  mod_add u_sub (.a(rd_data), .b(m), .sub(1'b1), .y(e_minus_m));

  assign busy       = (state != B_IDLE) || v1;
  assign rd_addr    = j;
  assign last_issue = (j == ((LOGN_MAX)'(1) << lvl) - 1'b1);
  assign span1      = (LOGN_MAX)'(1) << lvl1;

  always_comb begin
    wr_en   = '0;
    wr_addr = '0;
    wr_data = '0;
    if (state == B_INIT) begin
      wr_en[0]   = 1'b1;
      wr_data[0] = fe_t'(1);
    end else if (v1) begin
      wr_en      = 2'b11;
      wr_addr[0] = j1;
      wr_addr[1] = j1 + span1;
      wr_data[0] = e_minus_m;
      wr_data[1] = m;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= B_IDLE; n_q <= '0; lvl <= '0; lvl1 <= '0; j <= '0; j1 <= '0;
      v1 <= 1'b0; last1 <= 1'b0; done <= 1'b0;
    end else begin
      done  <= 1'b0;
      v1    <= (state == B_RUN);
      j1    <= j;
      lvl1  <= lvl;
      last1 <= (state == B_RUN) && last_issue && (lvl == n_q - 1'b1);
      if (last1 || (state == B_INIT && n_q == '0)) done <= 1'b1;
      unique case (state)
        B_IDLE: if (start) begin
          n_q <= n; lvl <= '0; j <= '0; state <= B_INIT;
        end
        B_INIT: state <= (n_q == '0) ? B_IDLE : B_RUN;
        B_RUN: begin
          if (last_issue) begin
            j     <= '0;
            state <= (lvl == n_q - 1'b1) ? B_IDLE : B_GAP;
          end else j <= j + 1'b1;
        end
        B_GAP: begin
          lvl   <= lvl + 1'b1;
          state <= B_RUN;
        end
        default: state <= B_IDLE;
      endcase
    end
  end
endmodule
