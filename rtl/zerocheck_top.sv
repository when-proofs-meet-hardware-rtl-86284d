// zerocheck_top: ZeroCheck proving accelerator with both PIOP back ends.
//
// Holds the two systems that realise the identity check of a zkSNARK
// prover: the NTT system (univariate ZeroCheck: iNTT, coset NTT,
// element-wise f/z_H, iNTT of the quotient) and the SumCheck system
// (multilinear ZeroCheck: Build MLE eq_r, then n SumCheck rounds with
// MLE updates, extensions and products).  They share nothing but the clock
// and reset; each has its own on-chip SRAM and its own off-chip-side ports,
// which are brought out here unchanged because the off-chip memory, the
// Fiat-Shamir hash and the polynomial commitment scheme are outside the
// chip.  A host (the testbench, in simulation) sequences both.
//
// Parameters: LOGN_MAX sets the largest on-chip transform / MLE table
// (2^LOGN_MAX elements), NBF the number of NTT butterflies, NSLOT the
// number of MLE banks and update slots, NLANE the number of product lanes.
module zerocheck_top
  import zk_pkg::*;
#(
  parameter int unsigned LOGN_MAX = 17,
  parameter int unsigned NBF      = 4,
  parameter int unsigned NSLOT    = 6,
  parameter int unsigned NLANE    = 4,
  localparam int unsigned NPTS    = EXT_POINTS,
  localparam int unsigned LNW     = $clog2(LOGN_MAX + 1),
  localparam int unsigned RIW     = $clog2(LOGN_MAX),
  localparam int unsigned SW      = $clog2(NSLOT),
  localparam int unsigned TW_AW   = LOGN_MAX - 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // ---------------- NTT system ----------------
  input  logic                          ntt_tw_wr_en,
  input  logic [TW_AW-1:0]              ntt_tw_wr_addr,
  input  fe_t                           ntt_tw_wr_data,
  input  logic                          ntt_pre_cfg_load,
  input  logic                          ntt_pre_cfg_fma,
  input  fe_t                           ntt_pre_cfg_s0,
  input  fe_t                           ntt_pre_cfg_ratio,
  input  logic                          ntt_post_cfg_load,
  input  fe_t                           ntt_post_cfg_s0,
  input  fe_t                           ntt_post_cfg_ratio,
  input  logic                          ntt_ld_start,
  input  logic [LNW-1:0]                ntt_ld_log_n,
  output logic                          ntt_ld_busy,
  output logic                          ntt_ld_done,
  input  logic                          ntt_in_valid,
  input  fe_t                           ntt_in_a,
  input  fe_t                           ntt_in_b,
  input  fe_t                           ntt_in_c,
  input  logic                          ntt_run_start,
  input  logic [LNW-1:0]                ntt_run_log_n,
  output logic                          ntt_run_busy,
  output logic                          ntt_run_stage0_done,
  output logic                          ntt_run_done,
  input  logic                          ntt_st_start,
  input  logic [LNW-1:0]                ntt_st_log_n,
  input  logic                          ntt_st_inv,
  output logic                          ntt_st_busy,
  output logic                          ntt_st_done,
  output logic                          ntt_out_valid,
  output fe_t                           ntt_out_data,
  // ---------------- SumCheck system ----------------
  input  logic                          sc_ext_wr_en,
  input  logic [SW-1:0]                 sc_ext_wr_bank,
  input  logic [LOGN_MAX-1:0]           sc_ext_wr_addr,
  input  fe_t                           sc_ext_wr_data,
  input  logic [SW-1:0]                 sc_ext_rd_bank,
  input  logic [LOGN_MAX-1:0]           sc_ext_rd_addr,
  output fe_t                           sc_ext_rd_data,
  input  logic [LNW-1:0]                sc_cfg_n,
  input  logic [NSLOT-1:0][SW-1:0]      sc_cfg_xbar_sel,
  input  logic [NSLOT-1:0]              sc_cfg_slot_en,
  input  factor_sel_t [NLANE-1:0][3:0]  sc_cfg_lane_sel,
  input  logic [NLANE-1:0]              sc_cfg_lane_en,
  input  logic [NLANE-1:0]              sc_cfg_lane_to_tmp,
  input  logic [NLANE-1:0]              sc_cfg_lane_pass,
  input  logic                          sc_r_wr_en,
  input  logic [RIW-1:0]                sc_r_wr_idx,
  input  fe_t                           sc_r_wr_data,
  input  logic                          sc_build_start,
  input  logic [SW-1:0]                 sc_build_bank,
  output logic                          sc_build_busy,
  output logic                          sc_build_done,
  input  logic                          sc_round_start,
  input  logic                          sc_round_first,
  input  logic                          sc_round_final,
  input  fe_t                           sc_round_alpha,
  output logic                          sc_round_busy,
  output logic                          sc_round_done,
  output logic                          sc_two_pass_seen,
  output logic                          sc_g_valid,
  input  logic                          sc_g_ready,
  output fe_t  [NPTS-1:0]               sc_g_data
);
  ntt_system #(.LOGN_MAX(LOGN_MAX), .NBF(NBF)) u_ntt (
    .clk, .rst_n,
    .tw_wr_en(ntt_tw_wr_en), .tw_wr_addr(ntt_tw_wr_addr), .tw_wr_data(ntt_tw_wr_data),
    .pre_cfg_load(ntt_pre_cfg_load), .pre_cfg_fma(ntt_pre_cfg_fma),
    .pre_cfg_s0(ntt_pre_cfg_s0), .pre_cfg_ratio(ntt_pre_cfg_ratio),
    .post_cfg_load(ntt_post_cfg_load), .post_cfg_s0(ntt_post_cfg_s0),
    .post_cfg_ratio(ntt_post_cfg_ratio),
    .ld_start(ntt_ld_start), .ld_log_n(ntt_ld_log_n), .ld_busy(ntt_ld_busy),
    .ld_done(ntt_ld_done), .in_valid(ntt_in_valid), .in_a(ntt_in_a), .in_b(ntt_in_b),
    .in_c(ntt_in_c),
    .run_start(ntt_run_start), .run_log_n(ntt_run_log_n), .run_busy(ntt_run_busy),
    .run_stage0_done(ntt_run_stage0_done), .run_done(ntt_run_done),
    .st_start(ntt_st_start), .st_log_n(ntt_st_log_n), .st_inv(ntt_st_inv), .st_busy(ntt_st_busy),
    .st_done(ntt_st_done), .out_valid(ntt_out_valid), .out_data(ntt_out_data));

  sumcheck_system #(.LOGN_MAX(LOGN_MAX), .NSLOT(NSLOT), .NLANE(NLANE), .NPTS(NPTS)) u_sc (
    .clk, .rst_n,
    .ext_wr_en(sc_ext_wr_en), .ext_wr_bank(sc_ext_wr_bank), .ext_wr_addr(sc_ext_wr_addr),
    .ext_wr_data(sc_ext_wr_data), .ext_rd_bank(sc_ext_rd_bank),
    .ext_rd_addr(sc_ext_rd_addr), .ext_rd_data(sc_ext_rd_data),
    .cfg_n(sc_cfg_n), .cfg_xbar_sel(sc_cfg_xbar_sel), .cfg_slot_en(sc_cfg_slot_en),
    .cfg_lane_sel(sc_cfg_lane_sel), .cfg_lane_en(sc_cfg_lane_en),
    .cfg_lane_to_tmp(sc_cfg_lane_to_tmp), .cfg_lane_pass(sc_cfg_lane_pass),
    .r_wr_en(sc_r_wr_en), .r_wr_idx(sc_r_wr_idx), .r_wr_data(sc_r_wr_data),
    .build_start(sc_build_start), .build_bank(sc_build_bank),
    .build_busy(sc_build_busy), .build_done(sc_build_done),
    .round_start(sc_round_start), .round_first(sc_round_first),
    .round_final(sc_round_final), .round_alpha(sc_round_alpha),
    .round_busy(sc_round_busy), .round_done(sc_round_done),
    .two_pass_seen(sc_two_pass_seen),
    .g_valid(sc_g_valid), .g_ready(sc_g_ready), .g_data(sc_g_data));
endmodule
