// sumcheck_system: the SumCheck-based (multilinear) ZeroCheck system.
//
// Proves sum_{x in {0,1}^n} f(x) * eq_r(x) = 0 for a sum of products f of
// MLEs.  NSLOT banks hold the MLE tables (loaded by the host, or built on
// chip: eq_r by the Build MLE unit); a crossbar binds banks to the PE's
// MLE-update slots; each slot folds its table with the previous challenge
// (MLE Update), extends the resulting pair to X_i = 0..NPTS-1 (Extension
// Engine); Pack-and-Select routes extensions to NLANE product lanes, each
// multiplying up to four factors per point; the accumulation registers sum
// the products over the hypercube, and the round polynomial
// G_i(0..NPTS-1) goes to the output FIFO.
//
// Round protocol (host side): build eq_r (build_start) while loading the
// other tables; then for i = 1..n pulse round_start (round_first for i = 1,
// else with round_alpha = alpha_{i-1}), wait for G_i on the FIFO, derive
// alpha_i (Fiat-Shamir, outside this block).  A last round_start with
// round_final and alpha_n only folds the tables: bank entry 0 then holds
// each MLE evaluated at (alpha_1..alpha_n), the values the prover opens.
//
// Round i processes table size M = 2^(n-i+1) as M/2 pairs, one pair per
// cycle.  Updates are in place: the four entries j, j+M, j+M/2, j+M/2+M of
// the previous table fold into entries j and j+M/2 of the new one, which
// are exactly the round's pair (the variable bound in each round is the
// most significant index bit).  A term with more factors than a lane has
// is split: lanes marked lane_to_tmp compute a partial product in pass 0
// and park it in the Tmp MLE; lanes with lane_pass = 1 read it back (factor
// SEL_TMP) in a second pass over the already-updated tables.
//
// Timing: issue -> bank read (1) -> MLE update (1) -> extension, select,
// product lane (1) -> accumulate/Tmp write (1); a pass over P pairs takes
// P + 4 cycles.  Round 1 is preceded by Build MLE (2^n + n + 1 cycles).
//
// From the paper: the block structure (banks, crossbar, MLE update by
// alpha_{i-1}, extension engines at X_i = 0-3, pack and select, product
// lanes with multiplier trees, Tmp MLE, accumulation registers, Build MLE,
// output FIFO) and the round schedule.  One PE, the port-level protocol,
// the in-place layout and the two-pass use of the Tmp MLE are this design's.
// Streaming (tiled) operation for tables larger than the banks is left to
// the host; this block processes whole on-chip tables.
module sumcheck_system
  import zk_pkg::*;
#(
  parameter int unsigned LOGN_MAX   = 17,
  parameter int unsigned NSLOT      = 6,
  parameter int unsigned NLANE      = 4,
  parameter int unsigned NPTS       = EXT_POINTS,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned LNW       = $clog2(LOGN_MAX + 1),
  localparam int unsigned RIW       = $clog2(LOGN_MAX),
  localparam int unsigned SW        = $clog2(NSLOT),
  localparam int unsigned AW        = LOGN_MAX
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // host access to the banks
  input  logic                             ext_wr_en,
  input  logic [SW-1:0]                    ext_wr_bank,
  input  logic [AW-1:0]                    ext_wr_addr,
  input  fe_t                              ext_wr_data,
  input  logic [SW-1:0]                    ext_rd_bank,
  input  logic [AW-1:0]                    ext_rd_addr,
  output fe_t                              ext_rd_data,
  // workload configuration (hold stable while a round runs)
  input  logic [LNW-1:0]                   cfg_n,
  input  logic [NSLOT-1:0][SW-1:0]         cfg_xbar_sel,
  input  logic [NSLOT-1:0]                 cfg_slot_en,
  input  factor_sel_t [NLANE-1:0][3:0]     cfg_lane_sel,
  input  logic [NLANE-1:0]                 cfg_lane_en,
  input  logic [NLANE-1:0]                 cfg_lane_to_tmp,
  input  logic [NLANE-1:0]                 cfg_lane_pass,
  // Build MLE
  input  logic                             r_wr_en,
  input  logic [RIW-1:0]                   r_wr_idx,
  input  fe_t                              r_wr_data,
  input  logic                             build_start,
  input  logic [SW-1:0]                    build_bank,
  output logic                             build_busy,
  output logic                             build_done,
  // rounds
  input  logic                             round_start,
  input  logic                             round_first,
  input  logic                             round_final,
  input  fe_t                              round_alpha,
  output logic                             round_busy,
  output logic                             round_done,
  output logic                             two_pass_seen,
  // round polynomial output FIFO
  output logic                             g_valid,
  input  logic                             g_ready,
  output fe_t  [NPTS-1:0]                  g_data
);
  // ---------------- banks ----------------
  logic [3:0][AW-1:0]        pe_rd_addr;
  fe_t  [NSLOT-1:0][3:0]     bank_rd;
  logic [NSLOT-1:0][1:0]     bank_wr_en, xb_wr_en;
  logic [NSLOT-1:0][1:0][AW-1:0] bank_wr_addr;
  fe_t  [NSLOT-1:0][1:0]     bank_wr_data, xb_wr;
  fe_t  [NSLOT-1:0]          bank_ext_rd;
  logic [1:0][AW-1:0]        pe_wr_addr;

  logic                      bld_busy_i;
  logic [AW-1:0]             bld_rd_addr;
  logic [1:0]                bld_wr_en;
  logic [1:0][AW-1:0]        bld_wr_addr;
  fe_t  [1:0]                bld_wr_data;
  logic [SW-1:0]             bld_bank_q;

  for (genvar b = 0; b < NSLOT; b++) begin : g_bank
    logic [3:0][AW-1:0] ra;
    logic               is_bld;
    assign is_bld = bld_busy_i && (bld_bank_q == SW'(b));
    always_comb begin
      ra = pe_rd_addr;
      if (is_bld) ra[0] = bld_rd_addr;
      bank_wr_en[b]   = is_bld ? bld_wr_en   : xb_wr_en[b];
      bank_wr_addr[b] = is_bld ? bld_wr_addr : pe_wr_addr;
      bank_wr_data[b] = is_bld ? bld_wr_data : xb_wr[b];
    end
    mle_bank #(.LOGN_MAX(LOGN_MAX)) u_bank (
      .clk, .rd_addr(ra), .rd_data(bank_rd[b]),
      .wr_en(bank_wr_en[b]), .wr_addr(bank_wr_addr[b]), .wr_data(bank_wr_data[b]),
      .ext_wr_en(ext_wr_en && ext_wr_bank == SW'(b)), .ext_wr_addr(ext_wr_addr),
      .ext_wr_data(ext_wr_data), .ext_rd_addr(ext_rd_addr), .ext_rd_data(bank_ext_rd[b]));
  end

  logic [SW-1:0] ext_rd_bank_q;
  always_ff @(posedge clk) ext_rd_bank_q <= ext_rd_bank;
  assign ext_rd_data = bank_ext_rd[ext_rd_bank_q];

  // ---------------- Build MLE ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bld_bank_q <= '0;
    else if (build_start && !bld_busy_i) bld_bank_q <= build_bank;
  end

  build_mle #(.LOGN_MAX(LOGN_MAX)) u_build (
    .clk, .rst_n, .r_wr_en, .r_wr_idx, .r_wr_data,
    .start(build_start), .n(cfg_n), .busy(bld_busy_i), .done(build_done),
    .rd_addr(bld_rd_addr), .rd_data(bank_rd[bld_bank_q][0]),
    .wr_en(bld_wr_en), .wr_addr(bld_wr_addr), .wr_data(bld_wr_data));
  assign build_busy = bld_busy_i;

  // ---------------- round controller ----------------
  typedef enum logic [1:0] {R_IDLE, R_ISSUE, R_DRAIN, R_PUSH} rstate_e;
  rstate_e rstate;

  logic [LNW-1:0]  cur_log;
  logic            upd_q, final_q, pass_q;
  fe_t             alpha_q;
  logic [AW-1:0]   j, n_iter, m_full, m_half;
  logic [2:0]      drain;
  logic            two_pass;

  assign two_pass = |(cfg_lane_pass & cfg_lane_en);
  assign m_full   = AW'(1) << cur_log;                     // new table size M
  assign m_half   = (cur_log == '0) ? '0 : (AW'(1) << (cur_log - 1'b1));
  assign n_iter   = (cur_log == '0) ? AW'(1) : m_half;
  assign round_busy = (rstate != R_IDLE);

  logic issue_upd;
  assign issue_upd = upd_q && !pass_q;

  always_comb begin
    pe_rd_addr[0] = j;
    pe_rd_addr[1] = issue_upd ? j + m_full : j + m_half;
    pe_rd_addr[2] = j + m_half;
    pe_rd_addr[3] = j + m_half + m_full;
  end

  // pipeline tags
  logic            v1, v2;
  logic [AW-1:0]   j1, j2, j3;
  logic            upd1, upd2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; j1 <= '0; j2 <= '0; j3 <= '0;
      upd1 <= 1'b0; upd2 <= 1'b0;
    end else begin
      v1 <= (rstate == R_ISSUE); j1 <= j;  upd1 <= issue_upd;
      v2 <= v1;                  j2 <= j1; upd2 <= upd1;
                                 j3 <= j2;
    end
  end

  // ---------------- crossbar, MLE update, extension ----------------
  fe_t  [NSLOT-1:0][3:0]      slot_rd;
  logic [NSLOT-1:0][1:0]      slot_wr_en;
  fe_t  [NSLOT-1:0][1:0]      slot_wr;
  fe_t  [NSLOT-1:0][NPTS-1:0] ext;
  logic [NSLOT-1:0]           upd_v;

  mle_crossbar #(.NSLOT(NSLOT), .NBANK(NSLOT)) u_xbar (
    .sel(cfg_xbar_sel), .slot_en(cfg_slot_en),
    .bank_rd(bank_rd), .slot_rd(slot_rd),
    .slot_wr_en(slot_wr_en), .slot_wr(slot_wr),
    .bank_wr_en(xb_wr_en), .bank_wr(xb_wr));

  assign pe_wr_addr[0] = j2;
  assign pe_wr_addr[1] = j2 + m_half;

  for (genvar k = 0; k < NSLOT; k++) begin : g_slot
    fe_t e0, e1;
    mle_update u_upd (
      .clk, .rst_n, .in_valid(v1 && cfg_slot_en[k]), .upd(upd1), .alpha(alpha_q),
      .p(slot_rd[k]), .out_valid(upd_v[k]), .e0(e0), .e1(e1));
    ext_engine #(.NPTS(NPTS)) u_ext (.e0(e0), .e1(e1), .v(ext[k]));
    assign slot_wr[k]       = {e1, e0};
    assign slot_wr_en[k][0] = upd_v[k] && upd2;
    assign slot_wr_en[k][1] = upd_v[k] && upd2 && (cur_log != '0);
  end

  // ---------------- Tmp MLE ----------------
  fe_t  [NPTS-1:0]            tmp_rd, tmp_wr;
  logic                       tmp_we;

  tmp_mle #(.LOGN_MAX(LOGN_MAX), .NPTS(NPTS)) u_tmp (
    .clk, .wr_en(tmp_we), .wr_addr(j3[AW-2:0]), .wr_data(tmp_wr),
    .rd_addr(j1[AW-2:0]), .rd_data(tmp_rd));

  // ---------------- pack and select, product lanes ----------------
  fe_t  [NLANE-1:0][3:0][NPTS-1:0] lane_in;
  fe_t  [NLANE-1:0][NPTS-1:0]      lane_prod;
  logic [NLANE-1:0]                lane_acc_v, lane_tmp_v;

  pack_select #(.NSLOT(NSLOT), .NLANE(NLANE), .NFAC(4), .NPTS(NPTS)) u_pack (
    .cfg(cfg_lane_sel), .ext(ext), .tmp(tmp_rd), .lane_in(lane_in));

  for (genvar l = 0; l < NLANE; l++) begin : g_lane
    product_lane #(.NPTS(NPTS)) u_lane (
      .clk, .rst_n,
      .in_valid(v2 && !final_q && cfg_lane_en[l] && (cfg_lane_pass[l] == pass_q)),
      .to_tmp(cfg_lane_to_tmp[l]), .f(lane_in[l]),
      .acc_valid(lane_acc_v[l]), .tmp_valid(lane_tmp_v[l]), .prod(lane_prod[l]));
  end

  always_comb begin
    tmp_we = 1'b0;
    tmp_wr = '0;
    for (int l = NLANE - 1; l >= 0; l--) begin
      if (lane_tmp_v[l]) begin
        tmp_we = 1'b1;
        tmp_wr = lane_prod[l];
      end
    end
  end

  // ---------------- accumulation registers and FIFO ----------------
  logic             acc_clear, fifo_push, fifo_full;
  fe_t [NPTS-1:0]   g_sum;

  acc_regs #(.NLANE(NLANE), .NPTS(NPTS)) u_acc (
    .clk, .rst_n, .clear(acc_clear), .add_en(lane_acc_v), .prod(lane_prod), .g(g_sum));

  round_fifo #(.NPTS(NPTS), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .push(fifo_push), .push_data(g_sum), .full(fifo_full),
    .pop_valid(g_valid), .pop_ready(g_ready), .pop_data(g_data));

  assign acc_clear = round_start && (rstate == R_IDLE);
  assign fifo_push = (rstate == R_PUSH) && !fifo_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate <= R_IDLE; cur_log <= '0; upd_q <= 1'b0; final_q <= 1'b0; pass_q <= 1'b0;
      alpha_q <= '0; j <= '0; drain <= '0; round_done <= 1'b0; two_pass_seen <= 1'b0;
    end else begin
      round_done <= 1'b0;
      unique case (rstate)
        R_IDLE: if (round_start) begin
          cur_log <= round_first ? cfg_n : cur_log - 1'b1;
          upd_q   <= !round_first;
          final_q <= round_final;
          alpha_q <= round_alpha;
          pass_q  <= 1'b0;
          j       <= '0;
          rstate  <= R_ISSUE;
        end
        R_ISSUE: begin
          if (j == n_iter - 1'b1) begin
            j      <= '0;
            drain  <= '0;
            rstate <= R_DRAIN;
          end else j <= j + 1'b1;
        end
        R_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 3'd3) begin
            if (!pass_q && two_pass && !final_q) begin
              pass_q        <= 1'b1;
              two_pass_seen <= 1'b1;
              rstate        <= R_ISSUE;
            end else if (final_q) begin
              rstate     <= R_IDLE;
              round_done <= 1'b1;
            end else rstate <= R_PUSH;
          end
        end
        R_PUSH: if (!fifo_full) begin
          rstate     <= R_IDLE;
          round_done <= 1'b1;
        end
        default: rstate <= R_IDLE;
      endcase
    end
  end
endmodule
