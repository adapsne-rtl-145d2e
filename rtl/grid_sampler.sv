// grid_sampler: grid sampling of the final embedding into exemplars.
//
// Uses the grid set up by the entropy unit (ymin, 1/gs per axis). All N
// points are streamed in index order, WAYS per cycle; a point is kept as an
// exemplar while its cell has produced fewer than `quota` exemplars, so
// dense cells are thinned and sparse cells keep all their points. Lanes of
// one cycle are resolved in lane order (lane l sees the picks of lanes < l).
// Kept points leave on ex_valid[l] / ex_index[l] in the cycle after their
// data arrive; done pulses with the total count once the last group is seen.
// The source names grid sampling only; the per-cell quota rule is this
// design's simplest reading of "grid sampling".
module grid_sampler
  import adapsne_pkg::*;
#(
  parameter int unsigned WAYS      = 4,
  parameter int unsigned GRID_LOG2 = 2,
  parameter int unsigned INV_W     = 16 + GRID_LOG2 + 1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  idx_t   n_points,
  input  idx_t   quota,
  input  coord_t ymin0,
  input  coord_t ymin1,
  input  logic [INV_W-1:0] inv0,
  input  logic [INV_W-1:0] inv1,
  output logic   y_rd_en,
  output idx_t   y_rd_grp,
  input  point_t y_rd_data [WAYS],
  output logic   ex_valid [WAYS],
  output idx_t   ex_index [WAYS],
  output logic   done,
  output idx_t   num_selected
);
  localparam int unsigned G     = 1 << GRID_LOG2;
  localparam int unsigned CELLS = G * G;
  localparam int unsigned CW    = $clog2(CELLS);

  typedef enum logic [1:0] {G_IDLE, G_RUN, G_LAST, G_DONE} gstate_t;
  gstate_t state;

  idx_t n_r, q_r, grp, n_grp, grp_q;
  logic rd_q;
  logic [WAYS-1:0] lane_ok;
  logic [IDX_W-1:0] taken [CELLS];

  assign n_grp    = idx_t'((n_r + idx_t'(WAYS - 1)) / idx_t'(WAYS));
  assign y_rd_en  = (state == G_RUN) && (grp < n_grp);
  assign y_rd_grp = grp;
  always_comb
    for (int l = 0; l < WAYS; l++) lane_ok[l] = rd_q && ((grp_q * idx_t'(WAYS) + idx_t'(l)) < n_r);

  logic [GRID_LOG2-1:0] ci [WAYS], cj [WAYS];
  logic [CW-1:0]        caddr [WAYS];
  for (genvar l = 0; l < WAYS; l++) begin : g_loc
    grid_locate #(.GRID_LOG2(GRID_LOG2), .INV_W(INV_W)) u_l0 (
      .y(y_rd_data[l].y0), .ymin(ymin0), .inv(inv0), .cidx(ci[l]));
    grid_locate #(.GRID_LOG2(GRID_LOG2), .INV_W(INV_W)) u_l1 (
      .y(y_rd_data[l].y1), .ymin(ymin1), .inv(inv1), .cidx(cj[l]));
    assign caddr[l] = CW'({cj[l], ci[l]});
  end

  // pick decision per lane, in lane order
  logic [WAYS-1:0] pick;
  always_comb begin
    logic [WAYS-1:0] pk;
    pk = '0;
    for (int l = 0; l < WAYS; l++) begin
      logic [IDX_W-1:0] prior;
      prior = taken[caddr[l]];
      for (int k = 0; k < l; k++)
        if (pk[k] && caddr[k] == caddr[l]) prior = prior + 1'b1;
      pk[l] = lane_ok[l] && (prior < q_r);
    end
    pick = pk;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= G_IDLE;
      n_r <= '0; q_r <= '0; grp <= '0; grp_q <= '0;
      rd_q <= 1'b0;
      done <= 1'b0;
      num_selected <= '0;
      for (int c = 0; c < CELLS; c++) taken[c] <= '0;
      for (int l = 0; l < WAYS; l++) begin
        ex_valid[l] <= 1'b0;
        ex_index[l] <= '0;
      end
    end else begin
      done  <= 1'b0;
      rd_q  <= y_rd_en;
      grp_q <= grp;
      if (y_rd_en) grp <= grp + 1'b1;
      for (int l = 0; l < WAYS; l++) begin
        ex_valid[l] <= pick[l];
        ex_index[l] <= grp_q * idx_t'(WAYS) + idx_t'(l);
      end
      if (rd_q) begin
        for (int c = 0; c < CELLS; c++) begin
          logic [IDX_W-1:0] add;
          add = '0;
          for (int l = 0; l < WAYS; l++)
            if (pick[l] && caddr[l] == CW'(c)) add = add + 1'b1;
          taken[c] <= taken[c] + add;
        end
        num_selected <= num_selected + idx_t'($countones(pick));
      end
      unique case (state)
        G_IDLE: if (start) begin
          n_r   <= (n_points == 0) ? idx_t'(1) : n_points;
          q_r   <= quota;
          grp   <= '0;
          num_selected <= '0;
          for (int c = 0; c < CELLS; c++) taken[c] <= '0;
          state <= G_RUN;
        end
        G_RUN:  if (!y_rd_en) state <= G_LAST;    // last data arrives now
        G_LAST: state <= G_DONE;                  // last picks registered
        G_DONE: begin
          done  <= 1'b1;
          state <= G_IDLE;
        end
        default: state <= G_IDLE;
      endcase
    end
  end
endmodule
