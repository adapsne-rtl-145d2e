// tb_grid_sampler: grid sampling of random embeddings against a reference
// that walks the points in index order and keeps a point while its cell has
// fewer than `quota` picks. Checks the exact set and order of exemplar
// indices, the count, and that some cells hit the quota (points dropped).
module tb_grid_sampler;
  import adapsne_pkg::*;
  localparam int unsigned WAYS = 4, GL = 2, G = 4, INV_W = 16 + GL + 1;
  localparam int NMAX = 300;
  logic clk = 0, rst_n = 0, start = 0;
  idx_t n_points, quota;
  coord_t ymin0, ymin1;
  logic [INV_W-1:0] inv0, inv1;
  logic y_rd_en, done;
  idx_t y_rd_grp, num_selected;
  point_t y_rd_data [WAYS];
  logic ex_valid [WAYS];
  idx_t ex_index [WAYS];
  int checks = 0, failures = 0, dropped_total = 0;
  int ya [NMAX], yb [NMAX];
  int got [$];

  grid_sampler #(.WAYS(WAYS), .GRID_LOG2(GL)) dut (.clk, .rst_n, .start, .n_points, .quota,
    .ymin0, .ymin1, .inv0, .inv1, .y_rd_en, .y_rd_grp, .y_rd_data, .ex_valid, .ex_index,
    .done, .num_selected);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (y_rd_en)
      for (int l = 0; l < WAYS; l++) begin
        int k;
        k = int'(y_rd_grp) * WAYS + l;
        y_rd_data[l] <= (k < NMAX) ? '{y0: 16'(ya[k]), y1: 16'(yb[k])} : '{y0: 16'h0, y1: 16'h0};
      end
    for (int l = 0; l < WAYS; l++) if (ex_valid[l]) got.push_back(int'(ex_index[l]));
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
    for (int t = 0; t < 12; t++) begin
      int n, q, mn0, mx0, mn1, mx1, taken [G*G];
      int exp_q [$];
      exp_q.delete();
      n = $urandom_range(5, NMAX);
      q = $urandom_range(1, 12);
      for (int k = 0; k < n; k++) begin
        ya[k] = (k % 3 == 0) ? $urandom_range(0, 400) : $urandom_range(0, 20000) - 10000;
        yb[k] = (k % 3 == 0) ? $urandom_range(0, 400) : $urandom_range(0, 20000) - 10000;
      end
      mn0 = ya[0]; mx0 = ya[0]; mn1 = yb[0]; mx1 = yb[0];
      for (int k = 1; k < n; k++) begin
        if (ya[k] < mn0) mn0 = ya[k];
        if (ya[k] > mx0) mx0 = ya[k];
        if (yb[k] < mn1) mn1 = yb[k];
        if (yb[k] > mx1) mx1 = yb[k];
      end
      foreach (taken[c]) taken[c] = 0;
      for (int k = 0; k < n; k++) begin
        int c;
        c = cell_of(ya[k], mn0, mx0) + G * cell_of(yb[k], mn1, mx1);
        if (taken[c] < q) begin taken[c]++; exp_q.push_back(k); end
        else dropped_total++;
      end
      ymin0 = 16'(mn0); ymin1 = 16'(mn1);
      inv0 = (mx0 == mn0) ? '0 : INV_W'((longint'(G) << 16) / longint'(mx0 - mn0));
      inv1 = (mx1 == mn1) ? '0 : INV_W'((longint'(G) << 16) / longint'(mx1 - mn1));
      n_points = idx_t'(n); quota = idx_t'(q);
      got.delete();
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks += 2;
      if (got != exp_q) begin failures++; $display("FAIL t=%0d got %0d picks exp %0d", t, got.size(), exp_q.size()); end
      if (int'(num_selected) !== exp_q.size()) begin failures++; $display("FAIL count"); end
    end
    checks++;
    if (dropped_total == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
