// adapsne_top: the AdapSNE dataset-sampling accelerator.
//
// Picks a small, evenly spread subset (the exemplars) of a training set.
// The data are embedded in 2-D by t-SNE; the per-point kernel widths
// sigma_i of t-SNE are found by a fireworks search (fwa_engine with
// eval_module), the evenness of the embedding is measured as grid entropy
// (entropy_unit), and the target perplexity is retuned until the entropy
// passes a threshold (adapsne_ctrl). Grid sampling (grid_sampler) then
// selects the exemplars.
// External parts, reached through ports:
//   * squared-distance memory d_ij (dist_rd_*): one word per cycle, data one
//     cycle after dist_rd_en;
//   * the t-SNE engine, which receives sigma_i* (sig_valid/index/value),
//     embeds on tsne_start and answers tsne_done; it writes Y to memory;
//   * the embedding memory Y (y_rd_*): four points per read, data one cycle
//     after y_rd_en. The entropy unit and the grid sampler never run at the
//     same time; the port goes to whichever is active (the "Arb" of the
//     entropy datapath);
//   * exemplar indices leave on ex_valid / ex_index, up to four per cycle.
// Start with `start` and a cfg_t; `done` pulses at the end, with the final
// target perplexity in final_perp and the entropy record in h_base (H_b),
// h_thresh (H0), h_last and the iteration / pass counts.
module adapsne_top
  import adapsne_pkg::*;
#(
  parameter int unsigned LANES     = 8,   // fireworks lanes / RAM banks
  parameter int unsigned WAYS      = 4,   // entropy lanes
  parameter int unsigned GRID_LOG2 = 2,   // grid g = 4
  parameter int unsigned INV_W     = 16 + GRID_LOG2 + 1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  cfg_t   cfg,
  output logic   busy,
  output logic   done,
  output sigma_t final_perp,
  output ent_t   h_base,
  output ent_t   h_thresh,
  output ent_t   h_last,
  output logic [7:0] iters,
  output logic [7:0] passes,      // t-SNE passes run (base + probe + main)
  // squared-distance memory
  output logic   dist_rd_en,
  output idx_t   dist_rd_row,
  output idx_t   dist_rd_col,
  input  dist_t  dist_rd_data,
  // t-SNE engine
  output logic   sig_valid,
  output idx_t   sig_index,
  output sigma_t sig_value,
  output logic   tsne_start,
  output sigma_t tsne_perp,
  input  logic   tsne_done,
  // embedding memory
  output logic   y_rd_en,
  output idx_t   y_rd_grp,
  input  point_t y_rd_data [WAYS],
  // exemplars
  output logic   ex_valid [WAYS],
  output idx_t   ex_index [WAYS],
  output idx_t   num_exemplars
);
  // controller
  logic   fwa_start, fwa_done, ent_start, ent_done, smp_start, smp_done;
  idx_t   fwa_point;
  sigma_t perp_t;
  entry_t fwa_best;
  ent_t   ent_h;

  adapsne_ctrl #(.GRID_LOG2(GRID_LOG2)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .fwa_start, .fwa_point, .perp_t, .fwa_done, .fwa_best,
    .sig_valid, .sig_index, .sig_value, .tsne_start, .tsne_done,
    .ent_start, .ent_done, .ent_h, .smp_start, .smp_done,
    .h_base, .h_thresh, .h_last, .iters, .passes);

  assign final_perp = perp_t;
  assign tsne_perp  = perp_t;

  // fireworks search and Evaluate Module
  logic   pop_valid, pop_ready, rewd_valid;
  sigma_t pop_sigma [LANES];
  fit_t   rewd_fit  [LANES];

  fwa_engine #(.LANES(LANES)) u_fwa (
    .clk, .rst_n, .start(fwa_start),
    .num_sparks(cfg.num_sparks), .num_gens(cfg.num_gens),
    .lo(cfg.sigma_lo), .hi(cfg.sigma_hi),
    .busy(), .done(fwa_done), .best(fwa_best),
    .pop_valid, .pop_ready, .pop_sigma, .rewd_valid, .rewd_fit);

  eval_module #(.LANES(LANES)) u_eval (
    .clk, .rst_n, .pop_valid, .pop_ready, .pop_sigma, .perp_t,
    .row(fwa_point), .n_points(cfg.n_points), .rewd_valid, .rewd_fit,
    .dist_rd_en, .dist_rd_row, .dist_rd_col, .dist_rd_data);

  // entropy unit and grid sampler share the embedding-memory port
  logic   e_rd_en, s_rd_en;
  idx_t   e_rd_grp, s_rd_grp;
  coord_t ymin0, ymin1;
  logic [INV_W-1:0] inv0, inv1;

  entropy_unit #(.WAYS(WAYS), .GRID_LOG2(GRID_LOG2), .INV_W(INV_W)) u_ent (
    .clk, .rst_n, .start(ent_start), .n_points(cfg.n_points),
    .y_rd_en(e_rd_en), .y_rd_grp(e_rd_grp), .y_rd_data,
    .done(ent_done), .entropy(ent_h), .ymin0, .ymin1, .inv0, .inv1);

  grid_sampler #(.WAYS(WAYS), .GRID_LOG2(GRID_LOG2), .INV_W(INV_W)) u_smp (
    .clk, .rst_n, .start(smp_start), .n_points(cfg.n_points), .quota(cfg.quota),
    .ymin0, .ymin1, .inv0, .inv1,
    .y_rd_en(s_rd_en), .y_rd_grp(s_rd_grp), .y_rd_data,
    .ex_valid, .ex_index, .done(smp_done), .num_selected(num_exemplars));

  assign y_rd_en  = e_rd_en | s_rd_en;
  assign y_rd_grp = s_rd_en ? s_rd_grp : e_rd_grp;

  a_one_reader: assert property (@(posedge clk) disable iff (!rst_n) !(e_rd_en && s_rd_en));
endmodule
