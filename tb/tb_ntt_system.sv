// tb_ntt_system: runs a complete univariate ZeroCheck of f = g1*g2 + g3 on
// the NTT system at N = 2^LN and checks every intermediate result against
// independent reference computations:
//   1. iNTT of each g_k's evaluations  -> coefficients (checked against a
//      direct O(N^2) inverse DFT);
//   2. coset NTT (pre unit scales c_i by GENERATOR^i) -> evaluations on the
//      coset (checked by evaluating the coefficient form at g*w^k);
//   3. element-wise (g1*g2 + g3)/z_H on the coset (pre unit in FMA mode),
//      iNTT, post unit scaling by g^-i/N -> quotient q; checked through
//      q(x)*(x^N - 1) = g1(x)*g2(x) + g3(x) at random points x.
// The next load is started as soon as the core frees the prefetch buffer,
// so loading overlaps the transform; overlaps are counted and must occur.
// Cycle counts of each transform are checked against the core's rate.
module tb_ntt_system;
  import zk_pkg::*;
  import tb_field_pkg::*;
  localparam int LOGN_MAX = 5, NBF = 4, LN = 5, N = 2**LN;
  localparam int TW_AW = LOGN_MAX - 1, LNW = 3;
  int checks = 0, failures = 0, overlaps = 0;
  logic clk = 0, rst_n = 0;
  logic tw_wr_en = 0; logic [TW_AW-1:0] tw_wr_addr = '0; fe_t tw_wr_data = '0;
  logic pre_cfg_load = 0, pre_cfg_fma = 0, post_cfg_load = 0;
  fe_t pre_cfg_s0 = '0, pre_cfg_ratio = '0, post_cfg_s0 = '0, post_cfg_ratio = '0;
  logic ld_start = 0, ld_busy, ld_done, in_valid = 0;
  logic [LNW-1:0] ld_log_n = LNW'(LN), run_log_n = LNW'(LN), st_log_n = LNW'(LN);
  fe_t in_a = '0, in_b = '0, in_c = '0, out_data;
  logic run_start = 0, run_busy, run_stage0_done, run_done;
  logic st_start = 0, st_inv = 0, st_busy, st_done, out_valid;

  ntt_system #(.LOGN_MAX(LOGN_MAX), .NBF(NBF)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fe_t out_buf [N];
  int  out_cnt;
  always @(posedge clk) if (rst_n && out_valid) begin out_buf[out_cnt] <= out_data; out_cnt <= out_cnt + 1; end

  task automatic check(string what, fe_t got, fe_t exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  task automatic cfg_pre(logic fma, fe_t s0, fe_t ratio);
    @(negedge clk); pre_cfg_load = 1; pre_cfg_fma = fma; pre_cfg_s0 = s0; pre_cfg_ratio = ratio;
    @(negedge clk); pre_cfg_load = 0;
  endtask
  task automatic cfg_post(fe_t s0, fe_t ratio);
    @(negedge clk); post_cfg_load = 1; post_cfg_s0 = s0; post_cfg_ratio = ratio;
    @(negedge clk); post_cfg_load = 0;
  endtask
  task automatic load(input fe_t a[N], input fe_t b[N], input fe_t c[N]);
    @(negedge clk); ld_start = 1;
    @(negedge clk); ld_start = 0;
    for (int i = 0; i < N; i++) begin
      in_valid = 1; in_a = a[i]; in_b = b[i]; in_c = c[i];
      @(negedge clk);
    end
    in_valid = 0;
    while (ld_busy) @(negedge clk);
  endtask
  task automatic run();
    int cyc;
    cyc = 0;
    @(negedge clk); run_start = 1;
    @(negedge clk); run_start = 0;
    while (!run_done) begin @(negedge clk); cyc++; end
    check("transform cycles", fe_t'(cyc <= LN * (N / (2 * NBF) + 2) + 1), fe_t'(1));
  endtask
  task automatic store(logic inv, output fe_t o[N]);
    out_cnt = 0;
    @(negedge clk); st_start = 1; st_inv = inv;
    @(negedge clk); st_start = 0;
    while (!st_done) @(negedge clk);
    @(negedge clk);
    check("store count", fe_t'(out_cnt), fe_t'(N));
    o = out_buf;
  endtask

  function automatic fe_t horner(input fe_t c[N], fe_t x);
    fe_t r = '0;
    for (int i = N - 1; i >= 0; i--) r = fadd(fmul(r, x), c[i]);
    return r;
  endfunction

  fe_t ev [3][N], co [3][N], hat [3][N], q [N], ones [N], zeros [N], pts [N];
  fe_t w, wi, g, gi, ninv, zinv;

  initial begin
    w = root_of_unity(LN); wi = finv(w); g = GENERATOR; gi = finv(g);
    ninv = finv(fe_t'(N));
    zinv = finv(fsub(fpow(g, fe_t'(N)), fe_t'(1)));
    for (int i = 0; i < N; i++) begin ones[i] = fe_t'(1); zeros[i] = '0; end
    // witness: g3 = -g1*g2 on H, so f vanishes on H
    for (int i = 0; i < N; i++) begin
      ev[0][i] = frand(); ev[1][i] = frand();
      ev[2][i] = fsub('0, fmul(ev[0][i], ev[1][i]));
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // twiddles: omega_(2^LOGN_MAX)^k
    begin
      fe_t om, acc;
      om = root_of_unity(LOGN_MAX); acc = fe_t'(1);
      for (int k = 0; k < 2**TW_AW; k++) begin
        @(negedge clk); tw_wr_en = 1; tw_wr_addr = TW_AW'(k); tw_wr_data = acc; acc = fmul(acc, om);
      end
      @(negedge clk); tw_wr_en = 0;
    end
    // 1. iNTT of evaluations -> coefficients
    cfg_pre(0, fe_t'(1), fe_t'(1));
    cfg_post(ninv, fe_t'(1));
    load(ev[0], zeros, zeros);
    for (int k = 0; k < 3; k++) begin
      fork
        run();
        begin
          // overlap: the next input streams in once the prefetch buffer is free
          if (k < 2) begin
            @(posedge run_stage0_done);
            if (run_busy) overlaps++;
            load(ev[k+1], zeros, zeros);
          end
        end
      join
      store(1, co[k]);
      for (int i = 0; i < N; i++) begin
        fe_t x, p;
        x = '0; p = fe_t'(1);
        for (int j = 0; j < N; j++) begin x = fadd(x, fmul(ev[k][j], fpow(wi, fe_t'(i * j % N)))); end
        check("coeff", co[k][i], fmul(x, ninv));
      end
    end
    // 2. coset NTT of each coefficient vector: scale c_i by g^i on the way in
    cfg_post(fe_t'(1), fe_t'(1));
    for (int k = 0; k < 3; k++) begin
      cfg_pre(0, fe_t'(1), g);
      load(co[k], zeros, zeros);
      run();
      store(0, hat[k]);
      for (int i = 0; i < N; i += 5) check("coset eval", hat[k][i], horner(co[k], fmul(g, fpow(w, fe_t'(i)))));
    end
    // 3. q evaluations on the coset = (g1*g2 + g3) / z_H, then iNTT and unshift
    cfg_pre(1, zinv, fe_t'(1));
    load(hat[0], hat[1], hat[2]);
    run();
    cfg_post(ninv, gi);
    store(1, q);
    for (int t = 0; t < 8; t++) begin
      fe_t x, lhs, rhs;
      x = frand();
      lhs = fmul(horner(q, x), fsub(fpow(x, fe_t'(N)), fe_t'(1)));
      rhs = fadd(fmul(horner(co[0], x), horner(co[1], x)), horner(co[2], x));
      check("q*z == f", lhs, rhs);
    end
    check("load/transform overlap happened", fe_t'(overlaps), fe_t'(2));
    $display("overlaps=%0d", overlaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
