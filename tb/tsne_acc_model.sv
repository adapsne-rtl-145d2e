// tsne_acc_model: behavioural stand-in for the t-SNE engine and the memory
// around it, for simulation only (not synthesizable logic).
//
// Holds a synthetic data set of up to NMAX points in CLUSTERS tight clusters
// on a plane (four clusters at (+-40, +-40); other counts on a 4-column
// lattice with 30 units pitch; point i is in cluster i mod CLUSTERS),
// answers squared-distance reads (one cycle latency), collects the sigma_i*
// values, and on tsne_start writes an "embedding": each point
// sits at its cluster centre plus its offset scaled by sigma_i / 4. A
// larger perplexity gives larger sigmas and so a more even spread, which is
// the behaviour the entropy loop relies on. tsne_done follows n_points
// cycles later. Embedding reads return four points per group, one cycle
// after y_rd_en.
module tsne_acc_model
  import adapsne_pkg::*;
#(
  parameter int NMAX     = 64,
  parameter int CLUSTERS = 4,
  parameter int WAYS     = 4
) (
  input  logic   clk,
  input  idx_t   n_points,
  input  logic   dist_rd_en,
  input  idx_t   dist_rd_row,
  input  idx_t   dist_rd_col,
  output dist_t  dist_rd_data,
  input  logic   sig_valid,
  input  idx_t   sig_index,
  input  sigma_t sig_value,
  input  logic   tsne_start,
  output logic   tsne_done,
  input  logic   y_rd_en,
  input  idx_t   y_rd_grp,
  output point_t y_rd_data [WAYS]
);
  int     cx [NMAX], cy [NMAX], ox [NMAX], oy [NMAX];
  sigma_t sig [NMAX];
  point_t y [NMAX];
  int     embeds = 0;

  initial begin
    tsne_done = 0;
    for (int i = 0; i < NMAX; i++) begin
      if (CLUSTERS == 4) begin
        cx[i] = ((i % CLUSTERS) % 2 == 0) ? -40 : 40;
        cy[i] = ((i % CLUSTERS) / 2 == 0) ? -40 : 40;
      end else begin
        cx[i] = ((i % CLUSTERS) % 4) * 30 - 45;
        cy[i] = ((i % CLUSTERS) / 4) * 30 - 30;
      end
      ox[i] = $urandom_range(0, 16) - 8;
      oy[i] = $urandom_range(0, 16) - 8;
      sig[i] = '0;
      y[i] = '0;
    end
  end

  function automatic int d2(int i, int j);
    return (cx[i] + ox[i] - cx[j] - ox[j]) ** 2 + (cy[i] + oy[i] - cy[j] - oy[j]) ** 2;
  endfunction

  function automatic coord_t place(int c, int o, sigma_t s);
    int v;
    v = c * 256 + (o * int'(s)) / 4;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return coord_t'(v);
  endfunction

  always @(posedge clk) begin
    if (dist_rd_en) dist_rd_data <= dist_t'(d2(int'(dist_rd_row), int'(dist_rd_col)));
    if (sig_valid) sig[sig_index] <= sig_value;
    if (y_rd_en)
      for (int l = 0; l < WAYS; l++) begin
        int k;
        k = int'(y_rd_grp) * WAYS + l;
        y_rd_data[l] <= (k < NMAX) ? y[k] : '0;
      end
  end

  initial begin
    forever begin
      @(posedge clk);
      if (tsne_start) begin
        for (int i = 0; i < NMAX; i++)
          y[i] = '{y0: place(cx[i], ox[i], sig[i]), y1: place(cy[i], oy[i], sig[i])};
        embeds++;
        repeat (int'(n_points)) @(posedge clk);
        tsne_done <= 1'b1;
        @(posedge clk);
        tsne_done <= 1'b0;
      end
    end
  end
endmodule
