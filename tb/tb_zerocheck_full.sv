// tb_zerocheck_full: the end-to-end test of tb_zerocheck_top run on the
// accelerator at its default (full) size: LOGN_MAX = 17 (prefetch, ping,
// pong and result buffers and MLE banks of 2^17 entries, 2^16 twiddles),
// four butterflies, six MLE slots and four product lanes.  The transform and
// table sizes are runtime inputs; to keep the simulation within minutes the
// univariate ZeroCheck runs at N = 2^13, the multilinear ZeroCheck at
// n = 13, the four-step NTT is 2^12 points from 2^6-point mini-NTTs (two of
// its output columns checked against a direct DFT) and the two-pass Tmp MLE
// workload at n = 4.  The full twiddle table (2^16 powers of the 2^17-th
// root of unity) is loaded, so the NTT uses its full-size addressing.  Same
// checks and mechanism counters as tb_zerocheck_top.
module tb_zerocheck_full;
  import zk_pkg::*;
  import tb_field_pkg::*;
  localparam int LOGN_MAX = 17, NBF = 4, NS = 6, NL = 4;
  localparam int LN = 13, LN4 = 6, TMP_TEST = 1;
  localparam int N = 2**LN, NMAX = 2**LOGN_MAX, NP = EXT_POINTS;
  localparam int LNW = $clog2(LOGN_MAX + 1), RIW = $clog2(LOGN_MAX), SW = $clog2(NS);
  localparam int TW_AW = LOGN_MAX - 1;
  localparam int NCOEF_CHECK = 4, NEVAL_CHECK = 4, FS_COLS = 2, WATCHDOG = 2000000;

  int checks = 0, failures = 0;
  int m_overlap = 0, m_inverse = 0, m_coset = 0, m_fma = 0, m_fourstep = 0;
  int m_build = 0, m_update = 0, m_tmp = 0, m_final = 0;

  logic clk = 0, rst_n = 0;
  // NTT side
  logic ntt_tw_wr_en = 0; logic [TW_AW-1:0] ntt_tw_wr_addr = '0; fe_t ntt_tw_wr_data = '0;
  logic ntt_pre_cfg_load = 0, ntt_pre_cfg_fma = 0, ntt_post_cfg_load = 0;
  fe_t ntt_pre_cfg_s0 = '0, ntt_pre_cfg_ratio = '0, ntt_post_cfg_s0 = '0, ntt_post_cfg_ratio = '0;
  logic ntt_ld_start = 0, ntt_ld_busy, ntt_ld_done, ntt_in_valid = 0;
  logic [LNW-1:0] ntt_ld_log_n = '0, ntt_run_log_n = '0, ntt_st_log_n = '0;
  fe_t ntt_in_a = '0, ntt_in_b = '0, ntt_in_c = '0, ntt_out_data;
  logic ntt_run_start = 0, ntt_run_busy, ntt_run_stage0_done, ntt_run_done;
  logic ntt_st_start = 0, ntt_st_inv = 0, ntt_st_busy, ntt_st_done, ntt_out_valid;
  // SumCheck side
  logic sc_ext_wr_en = 0; logic [SW-1:0] sc_ext_wr_bank = '0, sc_ext_rd_bank = '0;
  logic [LOGN_MAX-1:0] sc_ext_wr_addr = '0, sc_ext_rd_addr = '0;
  fe_t sc_ext_wr_data = '0, sc_ext_rd_data;
  logic [LNW-1:0] sc_cfg_n = '0;
  logic [NS-1:0][SW-1:0] sc_cfg_xbar_sel = '0;
  logic [NS-1:0] sc_cfg_slot_en = '0;
  factor_sel_t [NL-1:0][3:0] sc_cfg_lane_sel = '0;
  logic [NL-1:0] sc_cfg_lane_en = '0, sc_cfg_lane_to_tmp = '0, sc_cfg_lane_pass = '0;
  logic sc_r_wr_en = 0; logic [RIW-1:0] sc_r_wr_idx = '0; fe_t sc_r_wr_data = '0;
  logic sc_build_start = 0; logic [SW-1:0] sc_build_bank = '0; logic sc_build_busy, sc_build_done;
  logic sc_round_start = 0, sc_round_first = 0, sc_round_final = 0; fe_t sc_round_alpha = '0;
  logic sc_round_busy, sc_round_done, sc_two_pass_seen, sc_g_valid, sc_g_ready = 0;
  fe_t [NP-1:0] sc_g_data;

  zerocheck_top dut (.*);
  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, fe_t got, fe_t exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  // ======================= NTT host =======================
  fe_t out_buf [N];
  int  out_cnt;
  always @(posedge clk) if (rst_n && ntt_out_valid) begin out_buf[out_cnt] <= ntt_out_data; out_cnt <= out_cnt + 1; end

  task automatic cfg_pre(logic fma, fe_t s0, fe_t ratio);
    @(negedge clk); ntt_pre_cfg_load = 1; ntt_pre_cfg_fma = fma; ntt_pre_cfg_s0 = s0; ntt_pre_cfg_ratio = ratio;
    @(negedge clk); ntt_pre_cfg_load = 0;
    if (fma) m_fma++;
    if (ratio != fe_t'(1)) m_coset++;
  endtask
  task automatic cfg_post(fe_t s0, fe_t ratio);
    @(negedge clk); ntt_post_cfg_load = 1; ntt_post_cfg_s0 = s0; ntt_post_cfg_ratio = ratio;
    @(negedge clk); ntt_post_cfg_load = 0;
  endtask
  task automatic load(int ln, input fe_t a[N], input fe_t b[N], input fe_t c[N]);
    @(negedge clk); ntt_ld_start = 1; ntt_ld_log_n = LNW'(ln);
    @(negedge clk); ntt_ld_start = 0;
    for (int i = 0; i < (1 << ln); i++) begin
      ntt_in_valid = 1; ntt_in_a = a[i]; ntt_in_b = b[i]; ntt_in_c = c[i];
      @(negedge clk);
    end
    ntt_in_valid = 0;
    while (ntt_ld_busy) @(negedge clk);
  endtask
  task automatic run(int ln);
    int cyc;
    cyc = 0;
    @(negedge clk); ntt_run_start = 1; ntt_run_log_n = LNW'(ln);
    @(negedge clk); ntt_run_start = 0;
    while (!ntt_run_done) begin @(negedge clk); cyc++; end
    check("transform rate", fe_t'(cyc <= ln * ((1 << ln) / (2 * NBF) + 2) + 1), fe_t'(1));
  endtask
  task automatic store(int ln, logic inv, output fe_t o[N]);
    out_cnt = 0;
    @(negedge clk); ntt_st_start = 1; ntt_st_inv = inv; ntt_st_log_n = LNW'(ln);
    @(negedge clk); ntt_st_start = 0;
    while (!ntt_st_done) @(negedge clk);
    @(negedge clk);
    check("store count", fe_t'(out_cnt), fe_t'(1 << ln));
    if (inv) m_inverse++;
    o = out_buf;
  endtask

  function automatic fe_t horner(input fe_t c[N], fe_t x);
    fe_t r = '0;
    for (int i = N - 1; i >= 0; i--) r = fadd(fmul(r, x), c[i]);
    return r;
  endfunction

  fe_t ev [3][N], co [3][N], hat [3][N], q [N], zeros [N];

  task automatic univariate_zerocheck();
    fe_t w, wi, g, gi, ninv, zinv, om, acc;
    w = root_of_unity(LN); wi = finv(w); g = GENERATOR; gi = finv(g);
    ninv = finv(fe_t'(N));
    zinv = finv(fsub(fpow(g, fe_t'(N)), fe_t'(1)));
    for (int i = 0; i < N; i++) begin
      zeros[i] = '0;
      ev[0][i] = frand(); ev[1][i] = frand();
      ev[2][i] = fsub('0, fmul(ev[0][i], ev[1][i]));   // f vanishes on H
    end
    om = root_of_unity(LOGN_MAX); acc = fe_t'(1);
    for (int k = 0; k < 2**TW_AW; k++) begin
      @(negedge clk); ntt_tw_wr_en = 1; ntt_tw_wr_addr = TW_AW'(k); ntt_tw_wr_data = acc; acc = fmul(acc, om);
    end
    @(negedge clk); ntt_tw_wr_en = 0;
    // iNTTs, overlapping each transform with the next load
    cfg_pre(0, fe_t'(1), fe_t'(1));
    cfg_post(ninv, fe_t'(1));
    load(LN, ev[0], zeros, zeros);
    for (int k = 0; k < 3; k++) begin
      fork
        run(LN);
        if (k < 2) begin
          @(posedge ntt_run_stage0_done);
          if (ntt_run_busy) m_overlap++;
          load(LN, ev[k+1], zeros, zeros);
        end
      join
      store(LN, 1, co[k]);
      for (int i = 0; i < NCOEF_CHECK; i++) begin
        fe_t x, p, st;
        x = '0; p = fe_t'(1); st = fpow(wi, fe_t'(i));
        for (int j = 0; j < N; j++) begin x = fadd(x, fmul(ev[k][j], p)); p = fmul(p, st); end
        check("coefficient", co[k][i], fmul(x, ninv));
      end
    end
    // coset NTTs
    cfg_post(fe_t'(1), fe_t'(1));
    for (int k = 0; k < 3; k++) begin
      cfg_pre(0, fe_t'(1), g);
      load(LN, co[k], zeros, zeros);
      run(LN);
      store(LN, 0, hat[k]);
      for (int i = 0; i < NEVAL_CHECK; i++) begin
        int idx;
        idx = $urandom_range(N - 1);
        check("coset evaluation", hat[k][idx], horner(co[k], fmul(g, fpow(w, fe_t'(idx)))));
      end
    end
    // quotient
    cfg_pre(1, zinv, fe_t'(1));
    load(LN, hat[0], hat[1], hat[2]);
    run(LN);
    cfg_post(ninv, gi);
    store(LN, 1, q);
    for (int t = 0; t < 4; t++) begin
      fe_t x, lhs, rhs;
      x = frand();
      lhs = fmul(horner(q, x), fsub(fpow(x, fe_t'(N)), fe_t'(1)));
      rhs = fadd(fmul(horner(co[0], x), horner(co[1], x)), horner(co[2], x));
      check("q(x) z_H(x) = f(x)", lhs, rhs);
    end
  endtask

  // four-step NTT of size N4 = R*R, R = 2^LN4, from R-point mini-NTTs
  task automatic four_step();
    localparam int R = 2**LN4, N4 = R * R;
    fe_t x [N4], a [R][R], col [N], res [N], w4, ones [N];
    w4 = root_of_unity(2 * LN4);
    for (int i = 0; i < N; i++) ones[i] = fe_t'(1);
    for (int i = 0; i < N4; i++) x[i] = frand();
    cfg_pre(0, fe_t'(1), fe_t'(1));
    // step 1+2: for each n2, R-point NTT over n1 of x[R*n1 + n2], then twiddle w4^(n2*k1)
    for (int n2 = 0; n2 < R; n2++) begin
      for (int n1 = 0; n1 < R; n1++) col[n1] = x[R * n1 + n2];
      load(LN4, col, zeros, zeros);
      run(LN4);
      cfg_post(fe_t'(1), fpow(w4, fe_t'(n2)));
      m_fourstep++;
      store(LN4, 0, res);
      for (int k1 = 0; k1 < R; k1++) a[n2][k1] = res[k1];
    end
    // step 3: for each k1, R-point NTT over n2 -> X[k1 + R*k2]
    cfg_post(fe_t'(1), fe_t'(1));
    for (int k1 = 0; k1 < R; k1++) begin
      for (int n2 = 0; n2 < R; n2++) col[n2] = a[n2][k1];
      load(LN4, col, zeros, zeros);
      run(LN4);
      store(LN4, 0, res);
      if (k1 < FS_COLS) for (int k2 = 0; k2 < R; k2 += (R > 4 ? R / 4 : 1)) begin
        fe_t s, p, st;
        s = '0; p = fe_t'(1); st = fpow(w4, fe_t'(k1 + R * k2));
        for (int i = 0; i < N4; i++) begin s = fadd(s, fmul(x[i], p)); p = fmul(p, st); end
        check("four-step output", res[k2], s);
      end
    end
  endtask

  // ======================= SumCheck host =======================
  fe_t tbl [NS][N];
  fe_t r [LN];

  function automatic factor_sel_t fs(sel_kind_e k, int slot);
    factor_sel_t f;
    f.kind = k; f.slot = 3'(slot);
    return f;
  endfunction

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

  task automatic multilinear_zerocheck(int wl, int n, int eq_slot, int nslots);
    int m;
    fe_t claim, alpha;
    m = 1 << n;
    for (int k = 0; k < nslots; k++) if (k != eq_slot)
      for (int j = 0; j < m; j++) tbl[k][j] = frand();
    if (wl == 0) for (int j = 0; j < m; j++) tbl[2][j] = fsub('0, fmul(tbl[0][j], tbl[1][j]));
    for (int i = 0; i < n; i++) r[i] = frand();
    for (int j = 0; j < m; j++) begin
      fe_t e;
      e = fe_t'(1);
      for (int i = 1; i <= n; i++) e = fmul(e, ((j >> (n - i)) & 1) ? r[i-1] : fsub(fe_t'(1), r[i-1]));
      tbl[eq_slot][j] = e;
    end
    sc_cfg_n = LNW'(n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); sc_r_wr_en = 1; sc_r_wr_idx = RIW'(i); sc_r_wr_data = r[i];
    end
    @(negedge clk); sc_r_wr_en = 0; sc_build_start = 1; sc_build_bank = SW'(eq_slot);
    @(negedge clk); sc_build_start = 0;
    m_build++;
    for (int k = 0; k < nslots; k++) if (k != eq_slot)
      for (int j = 0; j < m; j++) begin
        sc_ext_wr_en = 1; sc_ext_wr_bank = SW'(k); sc_ext_wr_addr = LOGN_MAX'(j); sc_ext_wr_data = tbl[k][j];
        @(negedge clk);
      end
    sc_ext_wr_en = 0;
    while (sc_build_busy) @(negedge clk);
    claim = fadd(ref_g(wl, m, 0), ref_g(wl, m, 1));
    if (wl == 0) check("ZeroCheck claim is 0", claim, '0);
    alpha = '0;
    for (int i = 1; i <= n + 1; i++) begin
      fe_t [NP-1:0] gv;
      @(negedge clk); sc_round_start = 1; sc_round_first = (i == 1); sc_round_final = (i == n + 1);
      sc_round_alpha = alpha;
      @(negedge clk); sc_round_start = 0;
      while (!sc_round_done) @(negedge clk);
      if (i > 1) begin
        for (int k = 0; k < nslots; k++)
          for (int j = 0; j < m / 2; j++) tbl[k][j] = fadd(tbl[k][j], fmul(alpha, fsub(tbl[k][j + m/2], tbl[k][j])));
        m = m / 2;
        m_update++;
      end
      if (i == n + 1) begin m_final++; break; end
      if (sc_cfg_lane_pass != 0) m_tmp++;
      checks++;
      if (!sc_g_valid) begin failures++; $display("FAIL no round polynomial"); end
      gv = sc_g_data;
      @(negedge clk); sc_g_ready = 1;
      @(negedge clk); sc_g_ready = 0;
      for (int x = 0; x < NP; x++) check("round polynomial", gv[x], ref_g(wl, m, x));
      // a degree-5 round polynomial is not fixed by NP = 4 points, so the
      // running claim is only followed for the degree-3 workload
      if (wl == 0 || i == 1) check("G(0)+G(1) = claim", fadd(gv[0], gv[1]), claim);
      alpha = frand();                    // stands in for Hash(G_i)
      // next claim: G_i(alpha) by Lagrange interpolation over X = 0..NP-1
      begin
        fe_t s;
        s = '0;
        for (int a = 0; a < NP; a++) begin
          fe_t num, den;
          num = fe_t'(1); den = fe_t'(1);
          for (int b = 0; b < NP; b++) if (b != a) begin
            num = fmul(num, fsub(alpha, fe_t'(b)));
            den = fmul(den, fsub(fe_t'(a), fe_t'(b)));
          end
          s = fadd(s, fmul(gv[a], fmul(num, finv(den))));
        end
        claim = s;
      end
    end
    for (int k = 0; k < nslots; k++) begin
      @(negedge clk); sc_ext_rd_bank = SW'(k); sc_ext_rd_addr = '0;
      @(negedge clk);
      check("opened MLE value", sc_ext_rd_data, tbl[k][0]);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    univariate_zerocheck();
    $display("univariate ZeroCheck finished at cycle %0d", cycle);
    four_step();
    $display("four-step NTT finished at cycle %0d", cycle);
    // f = g1*g2 + g3: slots 0..2 = g1..g3, slot 3 = eq_r
    for (int k = 0; k < NS; k++) sc_cfg_xbar_sel[k] = SW'(k);
    sc_cfg_slot_en = NS'(6'b001111);
    sc_cfg_lane_en = NL'(2'b11); sc_cfg_lane_pass = '0; sc_cfg_lane_to_tmp = '0;
    sc_cfg_lane_sel[0] = {fs(SEL_ONE, 0), fs(SEL_MLE, 3), fs(SEL_MLE, 1), fs(SEL_MLE, 0)};
    sc_cfg_lane_sel[1] = {fs(SEL_ONE, 0), fs(SEL_ONE, 0), fs(SEL_MLE, 3), fs(SEL_MLE, 2)};
    multilinear_zerocheck(0, LN, 3, 4);
    $display("multilinear ZeroCheck finished at cycle %0d", cycle);
    if (TMP_TEST != 0) begin
      // f = g1*g2*g3*g4 (degree 5 with eq_r): lane 0 -> Tmp MLE, lane 1 = Tmp * eq_r.
      // Only the sums at X = 0..NP-1 are checked; the protocol needs NP >= 6 here.
      sc_cfg_slot_en = NS'(6'b011111);
      sc_cfg_lane_to_tmp = NL'(1); sc_cfg_lane_pass = NL'(2);
      sc_cfg_lane_sel[0] = {fs(SEL_MLE, 3), fs(SEL_MLE, 2), fs(SEL_MLE, 1), fs(SEL_MLE, 0)};
      sc_cfg_lane_sel[1] = {fs(SEL_ONE, 0), fs(SEL_ONE, 0), fs(SEL_MLE, 4), fs(SEL_TMP, 0)};
      multilinear_zerocheck(1, LN > 4 ? 4 : LN, 4, 5);
    end
    $display("mechanisms: overlap=%0d inverse=%0d coset=%0d fma=%0d fourstep=%0d build=%0d update=%0d tmp=%0d final=%0d",
             m_overlap, m_inverse, m_coset, m_fma, m_fourstep, m_build, m_update, m_tmp, m_final);
    if (m_overlap == 0 || m_inverse == 0 || m_coset == 0 || m_fma == 0 || m_fourstep == 0 ||
        m_build == 0 || m_update == 0 || m_final == 0 || (TMP_TEST != 0 && m_tmp == 0)) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
