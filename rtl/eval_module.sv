// eval_module: the Evaluate Module of the fireworks search. Receives
// LANES candidate sigmas of one point from the FWA engine (POP OUT), returns
// their fitness |R_i(sigma) - Pi_t| (REWD IN).
//
// All lanes score candidates for the same point i, so they need the same
// squared-distance row d_i0 .. d_i(N-1). The module reads that row once per
// round from an external memory (one word per cycle, data one cycle after
// the request, the diagonal j = i skipped) and broadcasts each word to the
// LANES perp_eval units, which accumulate in lock step.
// Every distance is first reduced by the smallest distance of the row,
// d_ij - min_j d_ij. This scales all kernels of the row by the same factor,
// which leaves p_j|i and the perplexity unchanged but keeps the largest
// kernel at 1, so a point far from all others does not underflow to zero at
// small sigma. The minimum comes from an extra pass over the row (N-1
// reads) in the first round for a point; it is kept with the row number and
// N, so later rounds of the same point skip the scan.
// Timing of one round: about 58 cycles (reciprocal of 2 sigma^2), N-1
// cycles of streaming, about 60 cycles to finish: roughly N + 120 cycles,
// plus N-1 cycles for the minimum scan in the first round of a point.
// pop_ready is high only in the idle state; rewd_valid pulses once per round.
// The lock-step broadcast of one distance row and the minimum shift are this
// design's choices; the source shows the Evaluate Module only as a dashed box.
module eval_module
  import adapsne_pkg::*;
#(
  parameter int unsigned LANES = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  // POP OUT: candidates to score
  input  logic   pop_valid,
  output logic   pop_ready,
  input  sigma_t pop_sigma [LANES],
  input  sigma_t perp_t,
  input  idx_t   row,
  input  idx_t   n_points,
  // REWD IN: fitness back to the engine
  output logic   rewd_valid,
  output fit_t   rewd_fit [LANES],
  // squared-distance memory (external)
  output logic   dist_rd_en,
  output idx_t   dist_rd_row,
  output idx_t   dist_rd_col,
  input  dist_t  dist_rd_data
);
  typedef enum logic [2:0] {E_IDLE, E_MINSCAN, E_MINLAST, E_WAITK, E_STREAM, E_FIN, E_WAITF} estate_t;
  estate_t state;

  idx_t   col;
  idx_t   row_r;
  idx_t   cache_row, cache_n;
  logic   cache_ok;
  dist_t  dmin;
  dist_t  d_shift;
  idx_t   n_r;
  logic   rd_q;         // a read was issued last cycle
  logic   start_lanes;
  logic   fin;
  logic   [LANES-1:0] k_rdy, l_done, done_seen;
  fit_t   l_fit [LANES];

  assign pop_ready   = (state == E_IDLE);
  assign start_lanes = pop_valid && pop_ready;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    perp_eval u_pe (
      .clk, .rst_n,
      .start(start_lanes), .sigma(pop_sigma[l]), .perp_t(perp_t),
      .k_ready(k_rdy[l]), .d_valid(rd_q && state != E_MINSCAN && state != E_MINLAST),
      .d(d_shift), .fin(fin),
      .done(l_done[l]), .fit(l_fit[l]));
  end

  // next column to read, skipping the diagonal
  idx_t col_eff;
  assign col_eff = (col == row_r) ? col + 1'b1 : col;

  assign d_shift = dist_rd_data - dmin;

  always_comb begin
    dist_rd_en  = (state == E_STREAM || state == E_MINSCAN) && (col_eff < n_r);
    dist_rd_row = row_r;
    dist_rd_col = col_eff;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= E_IDLE;
      col        <= '0;
      row_r      <= '0;
      n_r        <= '0;
      rd_q       <= 1'b0;
      fin        <= 1'b0;
      rewd_valid <= 1'b0;
      done_seen  <= '0;
      cache_ok   <= 1'b0;
      cache_row  <= '0;
      cache_n    <= '0;
      dmin       <= '0;
      for (int l = 0; l < LANES; l++) rewd_fit[l] <= '0;
    end else begin
      rewd_valid <= 1'b0;
      fin        <= 1'b0;
      rd_q       <= dist_rd_en;
      unique case (state)
        E_IDLE: if (start_lanes) begin
          row_r     <= row;
          n_r       <= n_points;
          col       <= '0;
          done_seen <= '0;
          if (cache_ok && row == cache_row && n_points == cache_n) state <= E_WAITK;
          else begin
            dmin  <= '1;
            state <= E_MINSCAN;
          end
        end
        // first round of a new point: find the nearest neighbour's distance
        E_MINSCAN: begin
          if (rd_q && dist_rd_data < dmin) dmin <= dist_rd_data;
          if (col_eff < n_r) col <= col_eff + 1'b1;
          else               state <= E_MINLAST;
        end
        E_MINLAST: begin
          if (rd_q && dist_rd_data < dmin) dmin <= dist_rd_data;
          cache_ok  <= 1'b1;
          cache_row <= row_r;
          cache_n   <= n_r;
          col       <= '0;
          state     <= E_WAITK;
        end
        E_WAITK: if (&k_rdy) state <= E_STREAM;
        E_STREAM: begin
          if (col_eff < n_r) col <= col_eff + 1'b1;
          else               state <= E_FIN;   // last data arrives this cycle
        end
        E_FIN: begin
          fin   <= 1'b1;
          state <= E_WAITF;
        end
        E_WAITF: begin
          for (int l = 0; l < LANES; l++)
            if (l_done[l]) rewd_fit[l] <= l_fit[l];
          done_seen <= done_seen | l_done;
          if (&(done_seen | l_done)) begin
            rewd_valid <= 1'b1;
            state      <= E_IDLE;
          end
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  // the diagonal p_{i|i} is never part of the distribution
  a_no_diag: assert property (@(posedge clk) disable iff (!rst_n)
    dist_rd_en |-> dist_rd_col != dist_rd_row);
endmodule
