// tb_adapsne_ctrl: the entropy-guided loop with behavioural FWA, t-SNE and
// entropy blocks. The entropy block returns H(Pi_t) from a chosen curve.
// A floating-point model of Algorithm 1 predicts the perplexity of every
// pass (base, k = 0 step, probe at Pi + dPi, Newton step with ceil); the
// controller must match it within one unit of Pi (exact for the base and
// the first step). Also checks N searches and N sigma hand-overs per pass,
// the threshold H0, and the exit reason. Scenarios: linear curve (ends at
// the threshold), saturating curve (ends at the iteration cap), falling
// curve (steps downwards, clamps at 1).
module tb_adapsne_ctrl;
  import adapsne_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  cfg_t cfg;
  logic busy, done, fwa_start, fwa_done = 0, sig_valid, tsne_start, tsne_done = 0;
  logic ent_start, ent_done = 0, smp_start, smp_done = 0;
  idx_t fwa_point, sig_index;
  sigma_t perp_t, sig_value;
  entry_t fwa_best;
  ent_t ent_h, h_base, h_thresh, h_last;
  logic [7:0] iters, passes;
  int checks = 0, failures = 0;
  int scenario, searches, handovers;
  real pass_perp [$];
  int  exits_threshold = 0, exits_cap = 0, down_steps = 0;

  adapsne_ctrl #(.GRID_LOG2(2)) dut (.clk, .rst_n, .start, .cfg, .busy, .done,
    .fwa_start, .fwa_point, .perp_t, .fwa_done, .fwa_best,
    .sig_valid, .sig_index, .sig_value, .tsne_start, .tsne_done,
    .ent_start, .ent_done, .ent_h, .smp_start, .smp_done,
    .h_base, .h_thresh, .h_last, .iters, .passes);
  always #5 clk = ~clk;

  function automatic ent_t curve(real p);
    real h;
    case (scenario)
      0: h = 1.0 + 0.15 * p;
      1: h = 4.0 - 3.0 * $exp(-p / 12.0);
      default: h = 3.0 - 0.1 * p;
    endcase
    if (h < 0.0) h = 0.0;
    if (h > 4.0) h = 4.0;
    return ent_t'(longint'(h * 65536.0));
  endfunction

  // behavioural FWA / t-SNE / entropy / sampler
  always @(posedge clk) begin
    if (fwa_start) fwa_best <= '{sigma: sigma_t'(fwa_point) + perp_t, fit: '0};
    fwa_done  <= fwa_start;
    tsne_done <= tsne_start;
    ent_done  <= ent_start;
    smp_done  <= smp_start;
    if (ent_start) ent_h <= curve(real'(perp_t) / 256.0);
    if (fwa_start) begin
      searches++;
      if (fwa_point == 0) pass_perp.push_back(real'(perp_t) / 256.0);
    end
    if (sig_valid) begin
      handovers++;
      if (sig_value !== sigma_t'(sig_index) + perp_t) failures++;
    end
  end

  function automatic real hq(real p);
    return real'(curve(p)) / 65536.0;
  endfunction

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (scenario = 0; scenario < 3; scenario++) begin
      real p, hb, h0, hk, hprev, hp, step, exp_p [$];
      int k, n, cap, exp_passes;
      n = 5;
      cap = (scenario == 1) ? 6 : 40;
      cfg = '0;
      cfg.n_points = idx_t'(n);
      cfg.perp0 = 16'h0500;      // 5.0
      cfg.max_iters = 8'(cap);
      // reference model of Algorithm 1
      p = 5.0; exp_p.delete(); exp_p.push_back(p);
      hb = hq(p);
      // threshold as the hardware forms it: Q8.16, alpha = 52429 / 2^16, truncated
      h0 = real'(curve(p) + ent_t'(((longint'(4) << 16) - longint'(curve(p))) * 52429 >> 16)) / 65536.0;
      hk = hb; hprev = hb; k = 0;
      while (hk < h0 && k < cap) begin
        real pn;
        if (k == 0) pn = p + 1.0;
        else begin
          exp_p.push_back(p + 0.5);
          hp = hq(p + 0.5);
          step = (hk - hprev) / ((hp - hk) / 0.5 + 1.0 / 256.0);
          pn = p + $ceil(step);
          if (step < 0) down_steps++;
        end
        if (pn < 1.0) pn = 1.0;
        if (pn > 255.0) pn = 255.0;
        exp_p.push_back(pn);
        hprev = hk; hk = hq(pn); p = pn; k++;
      end
      pass_perp.delete(); searches = 0; handovers = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks += 5;
      if (pass_perp.size() !== exp_p.size()) begin
        failures++; $display("FAIL s=%0d passes %0d exp %0d", scenario, pass_perp.size(), exp_p.size());
      end
      for (int i = 0; i < pass_perp.size() && i < exp_p.size(); i++) begin
        real d;
        d = pass_perp[i] - exp_p[i];
        checks++;
        if ((i < 2 && (d > 0.001 || d < -0.001)) || d > 1.001 || d < -1.001) begin
          failures++; $display("FAIL s=%0d pass %0d perp %f exp %f", scenario, i, pass_perp[i], exp_p[i]);
        end
      end
      if (searches !== n * pass_perp.size() || handovers !== searches) begin failures++; $display("FAIL searches"); end
      if (int'(iters) !== k) begin failures++; $display("FAIL iters %0d exp %0d", iters, k); end
      if ((real'(h_thresh) / 65536.0 - h0) > 0.001 || (h0 - real'(h_thresh) / 65536.0) > 0.001) begin
        failures++; $display("FAIL H0 %f exp %f", real'(h_thresh) / 65536.0, h0);
      end
      if (h_last >= h_thresh) exits_threshold++; else exits_cap++;
      if (h_base !== curve(5.0)) failures++;
      $display("scenario %0d: %0d passes, %0d iterations, final Pi %f", scenario, pass_perp.size(), k, pass_perp[$]);
    end
    checks += 3;
    if (exits_threshold == 0) begin failures++; $display("FAIL no threshold exit"); end
    if (exits_cap == 0) begin failures++; $display("FAIL no cap exit"); end
    if (down_steps == 0) begin failures++; $display("FAIL no downward step"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
