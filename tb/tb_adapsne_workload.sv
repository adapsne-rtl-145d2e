// tb_adapsne_workload: the whole accelerator at its default parameters on a
// scaled-down image-classification sampling job: N = 256 points in ten
// classes (the class count of the small image sets such as CIFAR-10), kept
// at a 10% keeping ratio, i.e. quota = ceil(0.1 * N / 16) exemplars per grid
// cell. The data set sizes of the real workloads only change N and the
// quota; their N^2 distance streaming is too long to simulate in full.
// Uses the same checks and mechanism counters as tb_adapsne_top: sigma_i*
// fitness against a floating-point reference, entropy of every pass,
// exemplars against a reference grid sampling, exit at H0 or at the
// iteration cap, and every mechanism happening at least once. Also prints
// the kept fraction.
module tb_adapsne_workload;
  import adapsne_pkg::*;
  localparam int N = 256, WAYS = 4, G = 4, CLASSES = 10, KEEP_PCT = 10;
  logic clk = 0, rst_n = 0, start = 0;
  cfg_t cfg;
  logic busy, done;
  sigma_t final_perp, sig_value, tsne_perp;
  ent_t h_base, h_thresh, h_last;
  logic [7:0] iters, passes;
  logic dist_rd_en, sig_valid, tsne_start, tsne_done, y_rd_en;
  idx_t dist_rd_row, dist_rd_col, sig_index, y_rd_grp, num_exemplars;
  dist_t dist_rd_data;
  point_t y_rd_data [WAYS];
  logic ex_valid [WAYS];
  idx_t ex_index [WAYS];
  int checks = 0, failures = 0;
  int got_ex [$];

  adapsne_top dut (.clk, .rst_n, .start, .cfg, .busy, .done, .final_perp, .h_base, .h_thresh,
    .h_last, .iters, .passes, .dist_rd_en, .dist_rd_row, .dist_rd_col, .dist_rd_data,
    .sig_valid, .sig_index, .sig_value, .tsne_start, .tsne_perp, .tsne_done,
    .y_rd_en, .y_rd_grp, .y_rd_data, .ex_valid, .ex_index, .num_exemplars);

  tsne_acc_model #(.NMAX(N), .CLUSTERS(CLASSES), .WAYS(WAYS)) u_tsne (.clk, .n_points(cfg.n_points),
    .dist_rd_en, .dist_rd_row, .dist_rd_col, .dist_rd_data,
    .sig_valid, .sig_index, .sig_value, .tsne_start, .tsne_done,
    .y_rd_en, .y_rd_grp, .y_rd_data);

  always #5 clk = ~clk;

  // ---------------- mechanism counters ----------------
  int n_explode = 0, n_fewer = 0, n_clip = 0, n_mutate = 0, n_mut_win = 0, n_elite_win = 0;
  int n_minscan = 0, n_cached = 0, n_base = 0, n_probe = 0, n_main = 0;
  int n_first_step = 0, n_newton = 0, n_quota_drop = 0, n_sigma = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_fwa.state == dut.u_fwa.F_SPARK && dut.pop_ready) begin
      n_explode++;
      for (int l = 0; l < 8; l++)
        if (dut.pop_sigma[l] == cfg.sigma_lo || dut.pop_sigma[l] == cfg.sigma_hi) n_clip++;
    end
    if (dut.u_fwa.state == dut.u_fwa.F_MUT && dut.pop_ready) n_mutate++;
    if (dut.u_fwa.state == dut.u_fwa.F_SPARK && dut.pop_ready && dut.u_fwa.r_cnt == 0)
      for (int l = 0; l < 8; l++) if (dut.u_fwa.m_l[l] < dut.u_fwa.m_r) n_fewer++;
    if (dut.u_fwa.state == dut.u_fwa.F_SEL4)
      for (int l = 0; l < 8; l++) begin
        if (dut.u_fwa.sel_best[l] == dut.u_fwa.mut_rd[l] && dut.u_fwa.mut_rd[l].fit < dut.u_fwa.fw_fit[l]) n_mut_win++;
        if (dut.u_fwa.sel_best[l] == dut.u_fwa.elite[l] && dut.u_fwa.elite[l].fit < dut.u_fwa.fw_fit[l]) n_elite_win++;
      end
    if (dut.u_eval.state == dut.u_eval.E_IDLE && dut.pop_valid) begin
      if (dut.u_eval.cache_ok && dut.u_eval.row == dut.u_eval.cache_row && dut.u_eval.n_points == dut.u_eval.cache_n)
        n_cached++;
      else n_minscan++;
    end
    if (dut.u_ctrl.state == dut.u_ctrl.C_ENT_W && dut.u_ctrl.ent_done)
      case (dut.u_ctrl.kind)
        dut.u_ctrl.K_BASE:  n_base++;
        dut.u_ctrl.K_PROBE: n_probe++;
        default:            n_main++;
      endcase
    if (dut.u_ctrl.state == dut.u_ctrl.C_CHECK && dut.u_ctrl.h_cur < dut.u_ctrl.h_thresh &&
        dut.u_ctrl.iters < cfg.max_iters && dut.u_ctrl.iters == 0) n_first_step++;
    if (dut.u_ctrl.state == dut.u_ctrl.C_NDIV && dut.u_ctrl.div_done) n_newton++;
    for (int l = 0; l < WAYS; l++) if (ex_valid[l]) got_ex.push_back(int'(ex_index[l]));
  end

  // ---------------- references ----------------
  function automatic real ref_perp(int i, real sigma);
    real s, h, w [N];
    s = 0.0;
    for (int j = 0; j < N; j++) begin
      w[j] = (j == i) ? 0.0 : $exp(-real'(u_tsne.d2(i, j)) / (2.0 * sigma * sigma));
      s += w[j];
    end
    if (s <= 0.0) return 1.0;
    h = 0.0;
    for (int j = 0; j < N; j++) if (w[j] > 0.0) h -= (w[j] / s) * $ln(w[j] / s) / $ln(2.0);
    return 2.0 ** h;
  endfunction

  function automatic int cell_of(int y, int mn, int mx);
    longint inv, q;
    if (mx == mn) return 0;
    inv = (longint'(G) << 16) / longint'(mx - mn);
    q = (longint'(y - mn) * inv) >>> 16;
    return (q >= G) ? G - 1 : int'(q);
  endfunction

  // cell of point k in the current embedding
  function automatic int cell_id(int k);
    int mn0, mx0, mn1, mx1;
    mn0 = 32767; mx0 = -32768; mn1 = 32767; mx1 = -32768;
    for (int i = 0; i < N; i++) begin
      if (int'(u_tsne.y[i].y0) < mn0) mn0 = u_tsne.y[i].y0;
      if (int'(u_tsne.y[i].y0) > mx0) mx0 = u_tsne.y[i].y0;
      if (int'(u_tsne.y[i].y1) < mn1) mn1 = u_tsne.y[i].y1;
      if (int'(u_tsne.y[i].y1) > mx1) mx1 = u_tsne.y[i].y1;
    end
    return cell_of(u_tsne.y[k].y0, mn0, mx0) + G * cell_of(u_tsne.y[k].y1, mn1, mx1);
  endfunction

  function automatic real ref_entropy();
    int cnt [G*G];
    real h;
    foreach (cnt[c]) cnt[c] = 0;
    for (int k = 0; k < N; k++) cnt[cell_id(k)]++;
    h = 0.0;
    foreach (cnt[c]) if (cnt[c] > 0) h -= (real'(cnt[c]) / N) * $ln(real'(cnt[c]) / N) / $ln(2.0);
    return h;
  endfunction

  // sigma hand-over: fitness consistency
  always @(posedge clk) if (sig_valid) begin
    real r, f, tol, got;
    n_sigma++;
    r = ref_perp(int'(sig_index), real'(sig_value) / 256.0);
    f = r - real'(tsne_perp) / 256.0;
    if (f < 0) f = -f;
    tol = 0.03 * r + 0.15;
    got = real'(dut.u_fwa.best.fit) / 256.0;
    checks += 2;
    if (got - f > tol || f - got > tol) begin
      failures++; $display("FAIL point %0d sigma %f fit %f exp %f", sig_index, real'(sig_value) / 256.0, got, f);
    end
    if (sig_value < cfg.sigma_lo || sig_value > cfg.sigma_hi) failures++;
  end

  // entropy of every pass
  always @(posedge clk) if (dut.ent_done) begin
    real hr, hd;
    hr = ref_entropy();
    hd = real'(dut.ent_h) / 65536.0;
    checks++;
    if (hd - hr > 0.02 || hr - hd > 0.02) begin failures++; $display("FAIL entropy %f exp %f", hd, hr); end
    $display("pass: Pi_t = %f  H = %f (ref %f)", real'(tsne_perp) / 256.0, hd, hr);
  end

  initial begin
    #2000000000;
    failures++;
    $display("watchdog expired");
    $display("kept %0d of %0d points (%0.1f%%), quota %0d per cell", num_exemplars, N,
      100.0 * real'(num_exemplars) / N, cfg.quota);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_ex [$], taken [G*G];
    cfg = '0;
    cfg.n_points   = idx_t'(N);
    cfg.perp0      = 16'h0200;      // 2.0
    cfg.num_sparks = 8'd4;
    cfg.num_gens   = 8'd4;
    cfg.sigma_lo   = 16'h0100;      // 1.0
    cfg.sigma_hi   = 16'h6400;      // 100.0
    cfg.max_iters  = 8'd5;
    cfg.quota      = idx_t'((KEEP_PCT * N + 100 * G * G - 1) / (100 * G * G));
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    // exemplars against a reference grid sampling of the final embedding
    foreach (taken[c]) taken[c] = 0;
    for (int k = 0; k < N; k++) begin
      int c;
      c = cell_id(k);
      if (taken[c] < int'(cfg.quota)) begin taken[c]++; exp_ex.push_back(k); end
      else n_quota_drop++;
    end
    checks += 5;
    if (got_ex != exp_ex) begin failures++; $display("FAIL exemplars: %0d vs %0d", got_ex.size(), exp_ex.size()); end
    if (int'(num_exemplars) !== exp_ex.size()) failures++;
    if (!(h_last >= h_thresh || iters == cfg.max_iters)) begin failures++; $display("FAIL loop exit"); end
    if (n_sigma !== N * (n_base + n_probe + n_main)) begin failures++; $display("FAIL sigma count"); end
    if (int'(passes) !== n_base + n_probe + n_main) begin failures++; $display("FAIL pass count"); end
    $display("H_b %f  H0 %f  H %f  iterations %0d  final Pi_t %f  exemplars %0d",
      real'(h_base) / 65536.0, real'(h_thresh) / 65536.0, real'(h_last) / 65536.0, iters,
      real'(final_perp) / 256.0, num_exemplars);
    $display("mechanisms: explode %0d fewer_sparks %0d clip %0d mutate %0d mut_win %0d elite_win %0d minscan %0d cached %0d",
      n_explode, n_fewer, n_clip, n_mutate, n_mut_win, n_elite_win, n_minscan, n_cached);
    $display("            base %0d probe %0d main %0d first_step %0d newton %0d quota_drop %0d exit_%s",
      n_base, n_probe, n_main, n_first_step, n_newton, n_quota_drop,
      (h_last >= h_thresh) ? "threshold" : "cap");
    checks += 14;
    if (n_explode == 0)    begin failures++; $display("FAIL no explosion"); end
    if (n_fewer == 0)      begin failures++; $display("FAIL no firework made fewer sparks"); end
    if (n_clip == 0)       begin failures++; $display("FAIL no clipping"); end
    if (n_mutate == 0)     begin failures++; $display("FAIL no mutation"); end
    if (n_mut_win == 0)    begin failures++; $display("FAIL mutant never won"); end
    if (n_elite_win == 0)  begin failures++; $display("FAIL elite never won"); end
    if (n_minscan == 0)    begin failures++; $display("FAIL no min scan"); end
    if (n_cached == 0)     begin failures++; $display("FAIL no cached round"); end
    if (n_base !== 1)       begin failures++; $display("FAIL base passes %0d", n_base); end
    if (n_probe == 0)      begin failures++; $display("FAIL no probe pass"); end
    if (n_main == 0)       begin failures++; $display("FAIL no main pass"); end
    if (n_first_step !== 1) begin failures++; $display("FAIL first step %0d", n_first_step); end
    if (n_newton == 0)     begin failures++; $display("FAIL no Newton step"); end
    if (n_quota_drop == 0) begin failures++; $display("FAIL quota never reached"); end
    $display("kept %0d of %0d points (%0.1f%%), quota %0d per cell", num_exemplars, N,
      100.0 * real'(num_exemplars) / N, cfg.quota);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
