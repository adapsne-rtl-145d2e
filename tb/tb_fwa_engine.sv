// tb_fwa_engine: the fireworks search with a behavioural evaluator whose
// fitness is |sigma - target| (a known optimum), answered after a random
// delay. Checks per search: number of evaluation rounds = 1 + T*(m+1),
// every candidate within [lo, hi], returned fitness consistent with the
// returned sigma, no worse than the best initial firework, and close to the
// optimum (within 1.0). Per generation and lane, the elite and the worst
// spark must be the best and worst of that lane's first m_l sparks, with
// m_l = m - floor(rank * m / 8) from the fitness rank of its firework.
// Counts how often the mutant and the elite win the selection, and how
// often a lane makes fewer than m sparks, and requires all three.
module tb_fwa_engine;
  import adapsne_pkg::*;
  localparam int unsigned LANES = 8;
  logic clk = 0, rst_n = 0, start = 0;
  logic [7:0] num_sparks, num_gens;
  sigma_t lo, hi;
  logic busy, done;
  entry_t best;
  logic pop_valid, pop_ready = 0, rewd_valid = 0;
  sigma_t pop_sigma [LANES];
  fit_t rewd_fit [LANES];
  int checks = 0, failures = 0;
  int rounds, out_of_range, target, init_best;
  int mut_wins = 0, elite_wins = 0, fewer = 0;
  entry_t spk_q [LANES][$];

  fwa_engine #(.LANES(LANES)) dut (.clk, .rst_n, .start, .num_sparks, .num_gens, .lo, .hi,
    .busy, .done, .best, .pop_valid, .pop_ready, .pop_sigma, .rewd_valid, .rewd_fit);
  always #5 clk = ~clk;

  function automatic fit_t fitness(sigma_t s);
    int d;
    d = int'(s) - target;
    return fit_t'((d < 0) ? -d : d);
  endfunction

  // behavioural Evaluate Module
  initial begin
    forever begin
      @(negedge clk);
      pop_ready = 1;
      if (pop_valid) begin
        sigma_t cap [LANES];
        cap = pop_sigma;
        @(negedge clk);
        pop_ready = 0;
        rounds++;
        for (int l = 0; l < LANES; l++) begin
          if (cap[l] < lo || cap[l] > hi) out_of_range++;
          if (rounds == 1 && (l == 0 || int'(fitness(cap[l])) < init_best)) init_best = fitness(cap[l]);
        end
        repeat ($urandom_range(0, 5)) @(negedge clk);
        rewd_valid = 1;
        for (int l = 0; l < LANES; l++) rewd_fit[l] = fitness(cap[l]);
        @(negedge clk);
        rewd_valid = 0;
      end
    end
  end

  // selection outcome of each generation
  always @(posedge clk)
    if (rst_n && dut.state == dut.F_SEL4)
      for (int l = 0; l < LANES; l++) begin
        if (dut.sel_best[l] == dut.mut_rd[l] && dut.mut_rd[l].fit < dut.fw_fit[l]) mut_wins++;
        if (dut.sel_best[l] == dut.elite[l] && dut.elite[l].fit < dut.fw_fit[l]) elite_wins++;
      end

  // spark sets: the elite / worst spark against the lane's own sparks
  always @(posedge clk) if (rst_n) begin
    if (dut.state == dut.F_LOAD2) foreach (spk_q[l]) spk_q[l].delete();
    if (dut.spk_we) foreach (spk_q[l]) spk_q[l].push_back(dut.cand_entry[l]);
    if (dut.state == dut.F_ELITE)
      for (int l = 0; l < LANES; l++) begin
        int rank, ml;
        entry_t mn, mx;
        rank = 0;
        for (int k = 0; k < LANES; k++)
          if (dut.fw_fit[k] < dut.fw_fit[l] || (dut.fw_fit[k] == dut.fw_fit[l] && k < l)) rank++;
        ml = spk_q[l].size() - (rank * spk_q[l].size()) / LANES;
        if (ml < spk_q[l].size()) fewer++;
        mn = spk_q[l][0]; mx = spk_q[l][0];
        for (int r = 1; r < ml; r++) begin
          if (spk_q[l][r].fit < mn.fit) mn = spk_q[l][r];
          if (spk_q[l][r].fit > mx.fit) mx = spk_q[l][r];
        end
        checks += 2;
        if (dut.elite[l] !== mn) begin failures++; $display("FAIL elite lane %0d", l); end
        if (dut.worst[l] !== mx) begin failures++; $display("FAIL worst lane %0d", l); end
      end
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      int m, g;
      m = $urandom_range(2, 12);
      g = $urandom_range(3, 12);
      num_sparks = 8'(m); num_gens = 8'(g);
      lo = 16'h0100; hi = 16'h6400;
      target = $urandom_range(2 * 256, 98 * 256);
      rounds = 0; out_of_range = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks += 5;
      if (rounds !== 1 + g * (m + 1)) begin failures++; $display("FAIL rounds %0d exp %0d", rounds, 1 + g * (m + 1)); end
      if (out_of_range !== 0) begin failures++; $display("FAIL %0d candidates out of range", out_of_range); end
      if (best.fit !== fitness(best.sigma)) begin failures++; $display("FAIL best fit inconsistent"); end
      if (int'(best.fit) > init_best) begin failures++; $display("FAIL best %0d worse than initial %0d", best.fit, init_best); end
      if (best.fit > 16'd256) begin failures++; $display("FAIL t=%0d target %0d best %0d fit %0d", t, target, best.sigma, best.fit); end
    end
    checks += 3;
    if (fewer == 0) begin failures++; $display("FAIL no firework made fewer sparks"); end
    if (mut_wins == 0) begin failures++; $display("FAIL mutant never selected"); end
    if (elite_wins == 0) begin failures++; $display("FAIL elite never selected"); end
    $display("selection wins: mutant %0d elite %0d; lanes with fewer sparks %0d", mut_wins, elite_wins, fewer);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
