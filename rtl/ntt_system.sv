// ntt_system: the NTT-based (univariate) ZeroCheck system.
//
// Data path: off-chip input stream -> element-wise unit (pre) -> prefetch
// double buffer -> constant-geometry NTT core (ping/pong buffers,
// butterflies, twiddle memory) -> result double buffer -> element-wise
// unit (post) -> off-chip output stream.
//
// Three engines run independently, each with its own start/busy/done, so
// the host can overlap them the way the paper's double buffers intend:
//   load  : accepts 2^ld_log_n elements (in_valid, operands a/b/c), passes
//           them through the pre unit and writes them, in natural order,
//           into the prefetch buffer;
//   run   : one 2^run_log_n-point transform, prefetch -> result buffer.
//           The prefetch buffer is only read in the first stage, so the
//           next load may start once run_stage0_done has pulsed;
//   store : reads the result buffer in natural order (undoing the core's
//           bit-reversed output), passes it through the post unit and
//           emits it on out_valid/out_data, one element per cycle.  With
//           st_inv it emits element (N-k) mod N as element k, which turns
//           the forward transform into an inverse one (the 1/N factor is
//           set in the post unit), so one twiddle table serves both.
// A ZeroCheck of f = g1*g2 + g3 is a host-sequenced series of these passes
// (see the README): per input an iNTT, the coset shift, a coset NTT, then
// the element-wise f/z_H and a final iNTT of q.  A four-step NTT uses the
// same passes on rows and columns of the N = R x C matrix, with its
// inter-step twiddles applied by the post unit.
//
// Timing: load and store move one element per cycle (the off-chip
// interface carries one element per cycle when in_valid is held high; it
// never stalls the output).  The pre/post units add one cycle each, the
// buffers one cycle of read latency.
module ntt_system
  import zk_pkg::*;
#(
  parameter int unsigned LOGN_MAX = 17,
  parameter int unsigned NBF      = 4,
  localparam int unsigned LOGB    = $clog2(NBF),
  localparam int unsigned RAW     = LOGN_MAX - LOGB,
  localparam int unsigned TW_AW   = LOGN_MAX - 1,
  localparam int unsigned LNW     = $clog2(LOGN_MAX + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // twiddle memory load
  input  logic               tw_wr_en,
  input  logic [TW_AW-1:0]   tw_wr_addr,
  input  fe_t                tw_wr_data,
  // element-wise unit configuration
  input  logic               pre_cfg_load,
  input  logic               pre_cfg_fma,
  input  fe_t                pre_cfg_s0,
  input  fe_t                pre_cfg_ratio,
  input  logic               post_cfg_load,
  input  fe_t                post_cfg_s0,
  input  fe_t                post_cfg_ratio,
  // load engine (stream from off-chip memory)
  input  logic               ld_start,
  input  logic [LNW-1:0]     ld_log_n,
  output logic               ld_busy,
  output logic               ld_done,
  input  logic               in_valid,
  input  fe_t                in_a,
  input  fe_t                in_b,
  input  fe_t                in_c,
  // transform engine
  input  logic               run_start,
  input  logic [LNW-1:0]     run_log_n,
  output logic               run_busy,
  output logic               run_stage0_done,
  output logic               run_done,
  // store engine (stream to off-chip memory)
  input  logic               st_start,
  input  logic [LNW-1:0]     st_log_n,
  input  logic               st_inv,      // emit X_(-k): turns the NTT into an iNTT
  output logic               st_busy,
  output logic               st_done,
  output logic               out_valid,
  output fe_t                out_data
);
  // ---------------- buffers ----------------
  logic [1:0][RAW-1:0]  pf_rd_row, rs_rd_row_unused;
  fe_t  [1:0][NBF-1:0]  pf_rd_data, rs_rd_data_unused;
  logic [1:0]           rs_wr_en;
  logic [1:0][RAW-1:0]  rs_wr_row;
  fe_t  [1:0][NBF-1:0]  rs_wr_data;
  logic                 pf_s_wr_en;
  logic [LOGN_MAX-1:0]  pf_s_wr_addr, rs_s_rd_addr;
  fe_t                  pf_s_wr_data, pf_s_rd_unused, rs_s_rd_data;

  assign rs_rd_row_unused = '0;

  ntt_buffer #(.LOGN_MAX(LOGN_MAX), .LANES(NBF)) u_prefetch (
    .clk, .rd_row(pf_rd_row), .rd_data(pf_rd_data),
    .wr_en(2'b00), .wr_row('0), .wr_data('0),
    .s_wr_en(pf_s_wr_en), .s_wr_addr(pf_s_wr_addr), .s_wr_data(pf_s_wr_data),
    .s_rd_addr('0), .s_rd_data(pf_s_rd_unused));

  ntt_buffer #(.LOGN_MAX(LOGN_MAX), .LANES(NBF)) u_result (
    .clk, .rd_row(rs_rd_row_unused), .rd_data(rs_rd_data_unused),
    .wr_en(rs_wr_en), .wr_row(rs_wr_row), .wr_data(rs_wr_data),
    .s_wr_en(1'b0), .s_wr_addr('0), .s_wr_data('0),
    .s_rd_addr(rs_s_rd_addr), .s_rd_data(rs_s_rd_data));

  // ---------------- transform engine ----------------
  ntt_core #(.LOGN_MAX(LOGN_MAX), .NBF(NBF)) u_core (
    .clk, .rst_n, .start(run_start), .log_n(run_log_n),
    .busy(run_busy), .done(run_done), .src_free(run_stage0_done),
    .tw_wr_en, .tw_wr_addr, .tw_wr_data,
    .src_rd_row(pf_rd_row), .src_rd_data(pf_rd_data),
    .snk_wr_en(rs_wr_en), .snk_wr_row(rs_wr_row), .snk_wr_data(rs_wr_data));

  // ---------------- load engine ----------------
  logic                pre_v;
  fe_t                 pre_y;
  logic [LOGN_MAX:0]   ld_cnt, ld_len;

  ew_unit u_pre (
    .clk, .rst_n, .cfg_load(pre_cfg_load), .cfg_fma(pre_cfg_fma),
    .cfg_s0(pre_cfg_s0), .cfg_ratio(pre_cfg_ratio),
    .in_valid(in_valid && ld_busy), .a(in_a), .b(in_b), .c(in_c),
    .out_valid(pre_v), .y(pre_y));

  assign pf_s_wr_en   = pre_v && ld_busy;
  assign pf_s_wr_addr = ld_cnt[LOGN_MAX-1:0];
  assign pf_s_wr_data = pre_y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_busy <= 1'b0; ld_done <= 1'b0; ld_cnt <= '0; ld_len <= '0;
    end else begin
      ld_done <= 1'b0;
      if (!ld_busy && ld_start) begin
        ld_busy <= 1'b1;
        ld_cnt  <= '0;
        ld_len  <= (LOGN_MAX + 1)'(1) << ld_log_n;
      end else if (ld_busy && pre_v) begin
        ld_cnt <= ld_cnt + 1'b1;
        if (ld_cnt == ld_len - 1'b1) begin
          ld_busy <= 1'b0;
          ld_done <= 1'b1;
        end
      end
    end
  end

  // ---------------- store engine ----------------
  logic [LOGN_MAX:0]   st_cnt, st_len;
  logic [LNW-1:0]      st_ln;
  logic                st_issue, st_rd_v, st_inv_q;
  logic [LOGN_MAX-1:0] st_k;

  function automatic logic [LOGN_MAX-1:0] bitrev_n(input logic [LOGN_MAX-1:0] v,
                                                  input logic [LNW-1:0] n);
    logic [LOGN_MAX-1:0] r;
    for (int i = 0; i < LOGN_MAX; i++) r[i] = v[LOGN_MAX-1-i];
    return r >> (LNW'(LOGN_MAX) - n);
  endfunction

  assign st_issue     = st_busy && (st_cnt != st_len);
  // Inverse transform: X^-1_k = X_((N-k) mod N), so only the read order changes.
  assign st_k         = st_inv_q ? LOGN_MAX'(st_len - st_cnt) & LOGN_MAX'(st_len - 1'b1)
                                 : st_cnt[LOGN_MAX-1:0];
  assign rs_s_rd_addr = bitrev_n(st_k, st_ln);

  ew_unit u_post (
    .clk, .rst_n, .cfg_load(post_cfg_load), .cfg_fma(1'b0),
    .cfg_s0(post_cfg_s0), .cfg_ratio(post_cfg_ratio),
    .in_valid(st_rd_v), .a(rs_s_rd_data), .b('0), .c('0),
    .out_valid(out_valid), .y(out_data));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_busy <= 1'b0; st_done <= 1'b0; st_cnt <= '0; st_len <= '0;
      st_ln <= '0; st_rd_v <= 1'b0; st_inv_q <= 1'b0;
    end else begin
      st_done <= 1'b0;
      st_rd_v <= st_issue;
      if (!st_busy && st_start) begin
        st_busy <= 1'b1;
        st_cnt  <= '0;
        st_ln   <= st_log_n;
        st_inv_q <= st_inv;
        st_len  <= (LOGN_MAX + 1)'(1) << st_log_n;
      end else if (st_issue) begin
        st_cnt <= st_cnt + 1'b1;
      end else if (st_busy && !st_rd_v && !out_valid) begin
        // last element has left the post unit
        st_busy <= 1'b0;
        st_done <= 1'b1;
      end
    end
  end
endmodule
