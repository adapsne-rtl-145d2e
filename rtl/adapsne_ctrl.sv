// adapsne_ctrl: entropy-guided optimisation of the target perplexity Pi_t
// (the closed loop of the accelerator, Algorithm 1).
//
// A "pass" at perplexity P runs, for every point i, the fireworks search
// for sigma_i* (each result is handed to the t-SNE engine on sig_valid),
// then lets the t-SNE engine embed the data (tsne_start .. tsne_done) and
// the entropy unit measure the embedding (ent_start .. ent_done).
// Sequence:
//   base pass at Pi^0 -> H_b;  H_max = log2(g*g);
//   H0 = H_b + alpha * (H_max - H_b), alpha = 0.8
//   while H < H0 (and fewer than max_iters iterations):
//     k = 0 : Pi^1 = Pi^0 + ceil(dPi)
//     k > 0 : probe pass at Pi^k + dPi gives the slope
//             s = (H(Pi^k + dPi) - H(Pi^k)) / dPi,
//             Pi^(k+1) = Pi^k + ceil((H(Pi^k) - H(Pi^(k-1))) / (s + eps))
//     main pass at Pi^(k+1) -> H, k = k + 1
//   grid sampling of the last embedding, then done.
// All H values are Q8.16 bits, Pi_t Q8.8; the Newton step is one signed
// division (magnitudes through the sequential divider) computed as
//   (H(Pi^k) - H(Pi^(k-1))) * dPi / (H(Pi^k + dPi) - H(Pi^k) + eps * dPi).
// Pi_t is kept within [1, 255.996].
// The loop, threshold, alpha and update rule are the source's; dPi, eps,
// the iteration cap and the clamp are this design's.
module adapsne_ctrl
  import adapsne_pkg::*;
#(
  parameter int unsigned GRID_LOG2 = 2,
  parameter logic [16:0] ALPHA_Q16 = 17'd52429,  // 0.8
  parameter sigma_t      DPERP     = 16'h0080,   // dPi = 0.5 (Q8.8)
  parameter ent_t        EPS       = 24'd256     // eps = 1/256 bit per unit of Pi
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  cfg_t   cfg,
  output logic   busy,
  output logic   done,
  // fireworks search, one point at a time
  output logic   fwa_start,
  output idx_t   fwa_point,
  output sigma_t perp_t,
  input  logic   fwa_done,
  input  entry_t fwa_best,
  // t-SNE engine
  output logic   sig_valid,
  output idx_t   sig_index,
  output sigma_t sig_value,
  output logic   tsne_start,
  input  logic   tsne_done,
  // entropy unit
  output logic   ent_start,
  input  logic   ent_done,
  input  ent_t   ent_h,
  // grid sampler
  output logic   smp_start,
  input  logic   smp_done,
  // status
  output ent_t   h_base,
  output ent_t   h_thresh,
  output ent_t   h_last,
  output logic [7:0] iters,
  output logic [7:0] passes
);
  localparam ent_t H_MAX = ent_t'(2 * GRID_LOG2) << 16;

  typedef enum logic [1:0] {K_BASE, K_PROBE, K_MAIN} pass_t;
  typedef enum logic [3:0] {
    C_IDLE, C_FWA, C_FWA_W, C_TSNE, C_TSNE_W, C_ENT_W,
    C_DECIDE, C_CHECK, C_NDIV, C_SMP_W
  } cstate_t;
  cstate_t state;
  pass_t   kind;

  cfg_t   cfg_r;
  idx_t   pt;
  sigma_t perp_cur, perp_next;
  ent_t   h_cur, h_prev;
  logic   neg_r;

  // signed Newton step through an unsigned divider
  logic        div_start, div_busy, div_done;
  logic [39:0] div_num, div_quo;
  logic [25:0] div_den;
  seq_div #(.NUM_W(40), .DEN_W(26)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quo(div_quo));

  function automatic sigma_t clamp_perp(input logic signed [18:0] v);
    if (v < 19'sd256)   return 16'h0100;
    if (v > 19'sd65535) return 16'hFFFF;
    return sigma_t'(v);
  endfunction

  assign busy      = (state != C_IDLE);
  assign fwa_point = pt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= C_IDLE; kind <= K_BASE;
      cfg_r <= '0; pt <= '0; sig_index <= '0; sig_value <= '0;
      perp_cur <= '0; perp_next <= '0; perp_t <= '0;
      h_cur <= '0; h_prev <= '0; h_base <= '0; h_thresh <= '0; h_last <= '0;
      iters <= '0; passes <= '0; neg_r <= 1'b0;
      fwa_start <= 1'b0; sig_valid <= 1'b0; tsne_start <= 1'b0;
      ent_start <= 1'b0; smp_start <= 1'b0; done <= 1'b0;
      div_start <= 1'b0; div_num <= '0; div_den <= '0;
    end else begin
      fwa_start  <= 1'b0;
      sig_valid  <= 1'b0;
      tsne_start <= 1'b0;
      ent_start  <= 1'b0;
      smp_start  <= 1'b0;
      done       <= 1'b0;
      div_start  <= 1'b0;
      unique case (state)
        C_IDLE: if (start) begin
          cfg_r    <= cfg;
          perp_cur <= clamp_perp(19'(cfg.perp0));
          perp_t   <= clamp_perp(19'(cfg.perp0));
          kind     <= K_BASE;
          iters    <= '0;
          passes   <= '0;
          pt       <= '0;
          state    <= C_FWA;
        end
        // ---- one pass at perplexity perp_t ----
        C_FWA: begin
          fwa_start <= 1'b1;
          state     <= C_FWA_W;
        end
        C_FWA_W: if (fwa_done) begin
          sig_valid <= 1'b1;             // sigma_i* to the t-SNE engine
          sig_index <= pt;
          sig_value <= fwa_best.sigma;
          state     <= C_FWA;
          if (pt + 1'b1 >= cfg_r.n_points) state <= C_TSNE;
        end
        C_TSNE: begin
          tsne_start <= 1'b1;            // sig_valid of the last point is seen first
          state      <= C_TSNE_W;
        end
        C_TSNE_W: if (tsne_done) begin
          ent_start <= 1'b1;
          state     <= C_ENT_W;
        end
        C_ENT_W: if (ent_done) begin
          h_last <= ent_h;
          passes <= passes + 1'b1;
          state  <= C_DECIDE;
        end
        // ---- Algorithm 1 ----
        C_DECIDE: begin
          unique case (kind)
            K_BASE: begin
              logic [41:0] span;
              h_base <= h_last;
              h_cur  <= h_last;
              span = (h_last >= H_MAX) ? '0 : 42'(H_MAX - h_last) * 42'(ALPHA_Q16);
              h_thresh <= h_last + ent_t'(span >> 16);
              state <= C_CHECK;
            end
            K_PROBE: begin
              // numerator (H(Pi^k) - H(Pi^(k-1))) * dPi, Q.24
              // denominator H(Pi^k + dPi) - H(Pi^k) + eps * dPi, Q.16
              logic signed [25:0] dh_k, dden;
              logic signed [41:0] num_s;
              dh_k  = $signed({2'b0, h_cur}) - $signed({2'b0, h_prev});
              dden  = $signed({2'b0, h_last}) - $signed({2'b0, h_cur})
                      + 26'(($signed({1'b0, EPS}) * $signed({1'b0, DPERP})) >>> 8);
              num_s = 42'(dh_k) * $signed({1'b0, DPERP});
              neg_r   <= (num_s < 0) ^ (dden < 0);
              div_num <= 40'((num_s < 0) ? -num_s : num_s);
              div_den <= (dden < 0) ? 26'(-dden) : 26'(dden);
              div_start <= 1'b1;
              state   <= C_NDIV;
            end
            default: begin               // K_MAIN
              h_prev   <= h_cur;
              h_cur    <= h_last;
              perp_cur <= perp_next;
              iters    <= iters + 1'b1;
              state    <= C_CHECK;
            end
          endcase
        end
        C_CHECK: begin
          if (h_cur >= h_thresh || iters >= cfg_r.max_iters) begin
            smp_start <= 1'b1;
            state     <= C_SMP_W;
          end else if (iters == 0) begin
            // Pi^1 = Pi^0 + ceil(dPi)
            perp_next <= clamp_perp($signed({3'b0, perp_cur}) +
                                    $signed({3'b0, (DPERP + 16'h00FF) & 16'hFF00}));
            perp_t    <= clamp_perp($signed({3'b0, perp_cur}) +
                                    $signed({3'b0, (DPERP + 16'h00FF) & 16'hFF00}));
            kind  <= K_MAIN;
            pt    <= '0;
            state <= C_FWA;
          end else begin
            perp_t <= clamp_perp($signed({3'b0, perp_cur}) + $signed({3'b0, DPERP}));
            kind   <= K_PROBE;
            pt     <= '0;
            state  <= C_FWA;
          end
        end
        C_NDIV: if (div_done) begin
          logic [16:0] mag, stepc;
          logic signed [18:0] nxt;
          mag = (div_quo[39:16] != 0) ? 17'h0FFFF : 17'(div_quo[15:0]);
          if (!neg_r) stepc = (mag + 17'h00FF) & 17'h1FF00;   // ceil(+x)
          else        stepc = mag & 17'h1FF00;               // ceil(-x) = -floor(x)
          nxt = neg_r ? $signed({3'b0, perp_cur}) - $signed({2'b0, stepc})
                      : $signed({3'b0, perp_cur}) + $signed({2'b0, stepc});
          perp_next <= clamp_perp(nxt);
          perp_t    <= clamp_perp(nxt);
          kind      <= K_MAIN;
          pt        <= '0;
          state     <= C_FWA;
        end
        C_SMP_W: if (smp_done) begin
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
      // advance the point counter after each search
      if (state == C_FWA_W && fwa_done) pt <= pt + 1'b1;
    end
  end
endmodule
