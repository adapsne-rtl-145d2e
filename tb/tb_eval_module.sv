// tb_eval_module: the Evaluate Module against a floating-point reference.
// For random point sets it scores 8 sigmas per round and compares
// |R_i(sigma) - Pi_t| with R_i = 2^H, H the entropy of the Gaussian
// conditional distribution p_{j|i} (tolerance 3% of R + 0.15). Two rounds
// per point: the first also scans the row for its minimum (2(N-1) reads),
// the second uses the cached minimum (N-1 reads). Also checks that the
// diagonal is never read and that a cached round takes at most N + 160 cycles.
// Every fourth point set has the scored point far from all others (squared
// distances 28,800..64,800) so that the row-minimum shift is exercised.
module tb_eval_module;
  import adapsne_pkg::*;
  localparam int unsigned LANES = 8;
  localparam int NMAX = 40;
  logic clk = 0, rst_n = 0;
  logic pop_valid = 0, pop_ready, rewd_valid;
  sigma_t pop_sigma [LANES];
  sigma_t perp_t;
  idx_t row, n_points;
  fit_t rewd_fit [LANES];
  logic dist_rd_en;
  idx_t dist_rd_row, dist_rd_col;
  dist_t dist_rd_data;
  int checks = 0, failures = 0;
  int px [NMAX], py [NMAX];
  int reads, diag_reads;

  eval_module #(.LANES(LANES)) dut (.clk, .rst_n, .pop_valid, .pop_ready, .pop_sigma, .perp_t,
    .row, .n_points, .rewd_valid, .rewd_fit, .dist_rd_en, .dist_rd_row, .dist_rd_col, .dist_rd_data);
  always #5 clk = ~clk;

  function automatic int dist2(int i, int j);
    return (px[i] - px[j]) ** 2 + (py[i] - py[j]) ** 2;
  endfunction

  always @(posedge clk) begin
    if (dist_rd_en) begin
      dist_rd_data <= dist_t'(dist2(int'(dist_rd_row), int'(dist_rd_col)));
      reads++;
      if (dist_rd_row == dist_rd_col) diag_reads++;
    end
  end

  function automatic real ref_perp(int i, int n, real sigma);
    real s, h, p, w [NMAX];
    s = 0.0;
    for (int j = 0; j < n; j++) begin
      w[j] = (j == i) ? 0.0 : $exp(-real'(dist2(i, j)) / (2.0 * sigma * sigma));
      s += w[j];
    end
    if (s <= 0.0) return 1.0;
    h = 0.0;
    for (int j = 0; j < n; j++) if (w[j] > 0.0) begin
      p = w[j] / s;
      h -= p * $ln(p) / $ln(2.0);
    end
    return 2.0 ** h;
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
    for (int t = 0; t < 24; t++) begin
      int n, i, cyc;
      if (t % 2 == 0) begin
      n = (t == 0) ? 2 : 8 + t;
      for (int k = 0; k < n; k++) begin
        px[k] = $urandom_range(0, 60);
        py[k] = $urandom_range(0, 60);
      end
      i = $urandom_range(0, n - 1);
      // every fourth set: point i isolated far from the rest, so all its
      // kernels would underflow without the minimum-distance shift
      if (t % 4 == 0 && t > 0) begin px[i] = 180; py[i] = 180; end
      end
      row = idx_t'(i); n_points = idx_t'(n);
      perp_t = 16'($urandom_range(256, 20 * 256));
      for (int l = 0; l < LANES; l++) pop_sigma[l] = 16'($urandom_range(128, 40 * 256));
      reads = 0; diag_reads = 0;
      @(negedge clk);
      pop_valid = 1;
      @(negedge clk);
      pop_valid = 0;
      cyc = 1;
      while (!rewd_valid) begin @(negedge clk); cyc++; end
      for (int l = 0; l < LANES; l++) begin
        real r, f, tol;
        r = ref_perp(i, n, real'(pop_sigma[l]) / 256.0);
        f = r - real'(perp_t) / 256.0;
        if (f < 0) f = -f;
        tol = 0.03 * r + 0.15;
        checks++;
        if ((real'(rewd_fit[l]) / 256.0 - f) > tol || (f - real'(rewd_fit[l]) / 256.0) > tol) begin
          failures++;
          $display("FAIL t=%0d l=%0d sigma=%f got %f exp %f (R=%f)", t, l,
                   real'(pop_sigma[l]) / 256.0, real'(rewd_fit[l]) / 256.0, f, r);
        end
      end
      checks += 3;
      if (reads !== ((t % 2 == 0) ? 2 : 1) * (n - 1)) begin failures++; $display("FAIL reads %0d n %0d", reads, n); end
      if (diag_reads !== 0) begin failures++; $display("FAIL diagonal read"); end
      if (cyc > ((t % 2 == 0) ? 2 : 1) * n + 160) begin failures++; $display("FAIL round took %0d cycles", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
