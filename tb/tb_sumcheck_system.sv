// tb_sumcheck_system: runs complete multilinear ZeroChecks on the SumCheck
// system and checks them against a reference SumCheck prover written in
// the testbench.
//   Workload A: f = g1*g2 + g3 (g3 = -g1*g2 on the hypercube, so f
//     vanishes), two lanes: g1*g2*eq and g3*eq.
//   Workload B: f = g1*g2*g3*g4, degree 5 with eq: lane 0 forms g1*g2*g3*g4
//     into the Tmp MLE in pass 0, lane 1 multiplies it by eq in pass 1.
// For each: eq_r is built on chip from random r, every round polynomial
// G_i(0..NPTS-1) from the FIFO is compared with the reference, the SumCheck
// identity G_i(0) + G_i(1) = G_(i-1)(alpha_(i-1)) is checked (with the
// first claim 0 for workload A), and after the final fold bank entry 0 of
// every table must equal the reference MLE evaluation at alpha.
// The per-round cycle count is checked against one hypercube pair per cycle.
module tb_sumcheck_system;
  import zk_pkg::*;
  import tb_field_pkg::*;
  localparam int L = 6, NS = 6, NL = 4, NP = 6, LNW = 3, RIW = 3, SW = 3;
  localparam int NMAX = 2**L;
  int checks = 0, failures = 0, two_pass_rounds = 0;

  logic clk = 0, rst_n = 0;
  logic ext_wr_en = 0; logic [SW-1:0] ext_wr_bank = '0, ext_rd_bank = '0;
  logic [L-1:0] ext_wr_addr = '0, ext_rd_addr = '0;
  fe_t ext_wr_data = '0, ext_rd_data;
  logic [LNW-1:0] cfg_n = '0;
  logic [NS-1:0][SW-1:0] cfg_xbar_sel = '0;
  logic [NS-1:0] cfg_slot_en = '0;
  factor_sel_t [NL-1:0][3:0] cfg_lane_sel = '0;
  logic [NL-1:0] cfg_lane_en = '0, cfg_lane_to_tmp = '0, cfg_lane_pass = '0;
  logic r_wr_en = 0; logic [RIW-1:0] r_wr_idx = '0; fe_t r_wr_data = '0;
  logic build_start = 0; logic [SW-1:0] build_bank = '0; logic build_busy, build_done;
  logic round_start = 0, round_first = 0, round_final = 0; fe_t round_alpha = '0;
  logic round_busy, round_done, two_pass_seen, g_valid, g_ready = 0;
  fe_t [NP-1:0] g_data;

  sumcheck_system #(.LOGN_MAX(L), .NSLOT(NS), .NLANE(NL), .NPTS(NP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, fe_t got, fe_t exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  fe_t tbl [NS][NMAX];     // reference tables, slot k in bank k
  fe_t r [L];

  function automatic factor_sel_t fs(sel_kind_e k, int slot);
    factor_sel_t f;
    f.kind = k; f.slot = 3'(slot);
    return f;
  endfunction

  // Reference G(X) = sum_j prod over terms; term t multiplies slots in mask[t].
  // Workload A: terms {0,1,3} + {2,3}; workload B: term {0,1,2,3,4}.
  function automatic fe_t ref_g(int wl, int m, int x);
    fe_t s = '0;
    for (int j = 0; j < m / 2; j++) begin
      fe_t v [NS];
      for (int k = 0; k < NS; k++) v[k] = fadd(tbl[k][j], fmul(fe_t'(x), fsub(tbl[k][j + m/2], tbl[k][j])));
      if (wl == 0) s = fadd(s, fadd(fmul(fmul(v[0], v[1]), v[3]), fmul(v[2], v[3])));
      else         s = fadd(s, fmul(fmul(fmul(v[0], v[1]), fmul(v[2], v[3])), v[4]));
    end
    return s;
  endfunction

  // Lagrange interpolation of G through X = 0..NP-1, evaluated at a.
  function automatic fe_t interp(fe_t [NP-1:0] gv, fe_t a);
    fe_t s = '0;
    for (int i = 0; i < NP; i++) begin
      fe_t num = fe_t'(1), den = fe_t'(1);
      for (int j = 0; j < NP; j++) if (j != i) begin
        num = fmul(num, fsub(a, fe_t'(j)));
        den = fmul(den, fsub(fe_t'(i), fe_t'(j)));
      end
      s = fadd(s, fmul(gv[i], fmul(num, finv(den))));
    end
    return s;
  endfunction

  task automatic run_workload(int wl, int n, int eq_slot, int nslots);
    int m;
    fe_t claim, alpha;
    m = 1 << n;
    // tables (reference and banks)
    for (int k = 0; k < nslots; k++) if (k != eq_slot)
      for (int j = 0; j < m; j++) tbl[k][j] = frand();
    if (wl == 0) for (int j = 0; j < m; j++) tbl[2][j] = fsub('0, fmul(tbl[0][j], tbl[1][j]));
    for (int i = 0; i < n; i++) r[i] = frand();
    for (int j = 0; j < m; j++) begin
      fe_t e = fe_t'(1);
      for (int i = 1; i <= n; i++) e = fmul(e, ((j >> (n - i)) & 1) ? r[i-1] : fsub(fe_t'(1), r[i-1]));
      tbl[eq_slot][j] = e;
    end
    cfg_n = LNW'(n);
    // eq_r is built on chip while the other tables are loaded
    for (int i = 0; i < n; i++) begin
      @(negedge clk); r_wr_en = 1; r_wr_idx = RIW'(i); r_wr_data = r[i];
    end
    @(negedge clk); r_wr_en = 0; build_start = 1; build_bank = SW'(eq_slot);
    @(negedge clk); build_start = 0;
    for (int k = 0; k < nslots; k++) if (k != eq_slot)
      for (int j = 0; j < m; j++) begin
        ext_wr_en = 1; ext_wr_bank = SW'(k); ext_wr_addr = L'(j); ext_wr_data = tbl[k][j];
        @(negedge clk);
      end
    ext_wr_en = 0;
    while (build_busy) @(negedge clk);
    // claim: sum of f*eq over the hypercube
    claim = '0;
    begin
      fe_t g0, g1;
      g0 = ref_g(wl, m, 0); g1 = ref_g(wl, m, 1);
      claim = fadd(g0, g1);
    end
    if (wl == 0) check("ZeroCheck claim", claim, '0);
    alpha = '0;
    for (int i = 1; i <= n + 1; i++) begin
      int cyc;
      fe_t [NP-1:0] gv;
      @(negedge clk); round_start = 1; round_first = (i == 1); round_final = (i == n + 1); round_alpha = alpha;
      @(negedge clk); round_start = 0;
      cyc = 1;
      while (!round_done) begin @(negedge clk); cyc++; end
      // reference fold with alpha (rounds 2..n+1)
      if (i > 1) begin
        for (int k = 0; k < nslots; k++)
          for (int j = 0; j < m / 2; j++) tbl[k][j] = fadd(tbl[k][j], fmul(alpha, fsub(tbl[k][j + m/2], tbl[k][j])));
        m = m / 2;
      end
      checks++;
      if (cyc > (wl == 1 ? 2 : 1) * ((m > 1 ? m / 2 : 1) + 5) + 2) begin
        failures++; $display("FAIL round %0d took %0d cycles", i, cyc);
      end
      if (i == n + 1) break;
      if (cfg_lane_pass != 0) two_pass_rounds++;
      // round polynomial from the FIFO
      checks++;
      if (!g_valid) begin failures++; $display("FAIL no G in FIFO"); end
      gv = g_data;
      @(negedge clk); g_ready = 1;
      @(negedge clk); g_ready = 0;
      for (int x = 0; x < NP; x++) check($sformatf("G_%0d(%0d)", i, x), gv[x], ref_g(wl, m, x));
      check("G(0)+G(1)=claim", fadd(gv[0], gv[1]), claim);
      alpha = frand();            // stands in for Hash(G_i)
      claim = interp(gv, alpha);
    end
    // opened values: entry 0 of each bank is the MLE at (alpha_1..alpha_n)
    for (int k = 0; k < nslots; k++) begin
      @(negedge clk); ext_rd_bank = SW'(k); ext_rd_addr = '0;
      @(negedge clk);
      check("opened value", ext_rd_data, tbl[k][0]);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Workload A: f = g1*g2 + g3, slots 0..2 = g1..g3, slot 3 = eq (banks permuted)
    for (int k = 0; k < NS; k++) cfg_xbar_sel[k] = SW'(k);
    cfg_slot_en = 6'b001111;
    cfg_lane_en = 4'b0011; cfg_lane_pass = '0; cfg_lane_to_tmp = '0;
    cfg_lane_sel[0] = {fs(SEL_ONE, 0), fs(SEL_MLE, 3), fs(SEL_MLE, 1), fs(SEL_MLE, 0)};
    cfg_lane_sel[1] = {fs(SEL_ONE, 0), fs(SEL_ONE, 0), fs(SEL_MLE, 3), fs(SEL_MLE, 2)};
    run_workload(0, 6, 3, 4);
    // Workload B: f = g1*g2*g3*g4, slot 4 = eq, Tmp MLE two-pass
    cfg_slot_en = 6'b011111;
    cfg_lane_en = 4'b0011; cfg_lane_to_tmp = 4'b0001; cfg_lane_pass = 4'b0010;
    cfg_lane_sel[0] = {fs(SEL_MLE, 3), fs(SEL_MLE, 2), fs(SEL_MLE, 1), fs(SEL_MLE, 0)};
    cfg_lane_sel[1] = {fs(SEL_ONE, 0), fs(SEL_ONE, 0), fs(SEL_MLE, 4), fs(SEL_TMP, 0)};
    run_workload(1, 4, 4, 5);
    checks++;
    if (!two_pass_seen || two_pass_rounds == 0) begin failures++; $display("FAIL two-pass never ran"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
