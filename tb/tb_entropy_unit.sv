// tb_entropy_unit: grid entropy of random embeddings against a reference
// computed here: bounding box, cell = floor((y - ymin) * g / range) (with
// the reciprocal rounded down to Q.16 as the hardware defines it), counts,
// H = -sum p log2 p in floating point (tolerance 0.02 bit). Also checks the
// grid origin, reads of points beyond N, and the cycle count
// 2*ceil(N/4) + 3 divisions + g*g/4 (+ a margin of 16).
module tb_entropy_unit;
  import adapsne_pkg::*;
  localparam int unsigned WAYS = 4, GL = 2, G = 4, INV_W = 16 + GL + 1;
  localparam int NMAX = 400;
  logic clk = 0, rst_n = 0, start = 0;
  idx_t n_points;
  logic y_rd_en, done;
  idx_t y_rd_grp;
  point_t y_rd_data [WAYS];
  ent_t entropy;
  coord_t ymin0, ymin1;
  logic [INV_W-1:0] inv0, inv1;
  int checks = 0, failures = 0;
  int ya [NMAX], yb [NMAX];

  entropy_unit #(.WAYS(WAYS), .GRID_LOG2(GL)) dut (.clk, .rst_n, .start, .n_points,
    .y_rd_en, .y_rd_grp, .y_rd_data, .done, .entropy, .ymin0, .ymin1, .inv0, .inv1);
  always #5 clk = ~clk;

  always @(posedge clk)
    if (y_rd_en)
      for (int l = 0; l < WAYS; l++) begin
        int k;
        k = int'(y_rd_grp) * WAYS + l;
        y_rd_data[l] <= (k < NMAX) ? '{y0: 16'(ya[k]), y1: 16'(yb[k])} : '{y0: 16'h5A5A, y1: 16'h5A5A};
      end

  function automatic int cell_of(int y, int mn, int mx);
    longint inv, q;
    if (mx == mn) return 0;
    inv = (longint'(G) << 16) / longint'(mx - mn);
    q = (longint'(y - mn) * inv) >>> 16;
    return (q >= G) ? G - 1 : int'(q);
  endfunction

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 16; t++) begin
      int n, mn0, mx0, mn1, mx1, cyc, cnt [G*G];
      real h, hd;
      n = (t == 0) ? 1 : (t == 1) ? 7 : $urandom_range(10, NMAX);
      for (int k = 0; k < n; k++) begin
        if (t % 3 == 0) begin           // one dense cluster plus spread
          ya[k] = (k % 5 == 0) ? $urandom_range(0, 20000) - 10000 : $urandom_range(0, 500);
          yb[k] = (k % 5 == 0) ? $urandom_range(0, 20000) - 10000 : $urandom_range(0, 500);
        end else begin
          ya[k] = $urandom_range(0, 30000) - 15000;
          yb[k] = $urandom_range(0, 30000) - 15000;
        end
      end
      mn0 = ya[0]; mx0 = ya[0]; mn1 = yb[0]; mx1 = yb[0];
      for (int k = 1; k < n; k++) begin
        if (ya[k] < mn0) mn0 = ya[k];
        if (ya[k] > mx0) mx0 = ya[k];
        if (yb[k] < mn1) mn1 = yb[k];
        if (yb[k] > mx1) mx1 = yb[k];
      end
      foreach (cnt[c]) cnt[c] = 0;
      for (int k = 0; k < n; k++) cnt[cell_of(ya[k], mn0, mx0) + G * cell_of(yb[k], mn1, mx1)]++;
      h = 0.0;
      foreach (cnt[c]) if (cnt[c] > 0) h -= (real'(cnt[c]) / n) * $ln(real'(cnt[c]) / n) / $ln(2.0);
      n_points = idx_t'(n);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      hd = real'(entropy) / 65536.0;
      checks += 4;
      if (hd - h > 0.02 || h - hd > 0.02) begin
        failures++; $display("FAIL t=%0d n=%0d H=%f exp %f", t, n, hd, h);
      end
      if (int'(ymin0) !== mn0 || int'(ymin1) !== mn1) begin failures++; $display("FAIL ymin"); end
      if (cyc > 2 * ((n + 3) / 4) + 3 * 35 + G * G / 4 + 16) begin failures++; $display("FAIL cycles %0d", cyc); end
      if (cyc < 2 * ((n + 3) / 4)) begin failures++; $display("FAIL too fast %0d", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
