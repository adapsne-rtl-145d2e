// entropy_unit: grid-based entropy of the low-dimensional embedding Y.
//
// Measures how evenly the N points y = (y0, y1) spread over a g x g grid
// laid over their bounding box: H = -sum p_c log2 p_c, p_c = n_c / N. H
// reaches log2(g*g) when every cell holds the same number of points.
// Phases after `start` (WAYS = 4 points per cycle throughout):
//   scan   read all points, find ymin/ymax of both axes
//   recip  sequential divider: inv_d = g*2^16 / (ymax_d - ymin_d) (= 1/gs_d)
//          and inv_n = 2^32 / N (= 1/N, Q0.32)
//   count  read all points again; per lane cell = (i, j) from the
//          subtract/multiply/shift chain, counter address i + j*g; the
//          shared counter array adds the four lanes' hits each cycle
//   sum    the same counters are read four per cycle: p = n * (1/N),
//          log2 p, p * (-log2 p), a 4-input adder tree, accumulate
// done pulses with `entropy` (Q8.16 bits) and the grid set-up (ymin, 1/gs),
// which the grid sampler reuses. Cycles: about 2*ceil(N/4) + 3*55 + g*g/4.
// Point memory: group k = points 4k..4k+3, data one cycle after y_rd_en;
// points at index >= N in the last group are ignored.
// Follows the source's datapath (4 ways, reconfigurable ymin, 1/gs and 1/N
// registers, shared counter RAM reused for the probability stage, log and
// multipliers, adder tree). Its skewed per-lane update order is replaced by
// a counter array that takes all four increments at once; the on-chip
// computation of ymin, 1/gs and 1/N is this design's.
module entropy_unit
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
  output logic   y_rd_en,
  output idx_t   y_rd_grp,
  input  point_t y_rd_data [WAYS],
  output logic   done,
  output ent_t   entropy,
  output coord_t ymin0,
  output coord_t ymin1,
  output logic [INV_W-1:0] inv0,
  output logic [INV_W-1:0] inv1
);
  localparam int unsigned G     = 1 << GRID_LOG2;
  localparam int unsigned CELLS = G * G;
  localparam int unsigned CW    = $clog2(CELLS);
  localparam int unsigned NUM_W = 33;
  localparam int unsigned DEN_W = IDX_W;

  typedef enum logic [3:0] {
    H_IDLE, H_SCAN, H_SCAN_W, H_DIV0, H_DIV1, H_DIVN, H_COUNT, H_COUNT_W, H_SUM, H_DONE
  } hstate_t;
  hstate_t state;

  idx_t   n_r, grp, n_grp;
  logic   rd_q;
  logic [WAYS-1:0] lane_ok, lane_ok_q;
  coord_t ymax0, ymax1;
  logic [31:0] inv_n;
  logic [IDX_W-1:0] cnt [CELLS];   // shared counter RAM
  logic [CW-1:0]    cbase;
  ent_t             acc;

  assign n_grp = idx_t'((n_r + idx_t'(WAYS - 1)) / idx_t'(WAYS));
  always_comb
    for (int l = 0; l < WAYS; l++) lane_ok[l] = (grp * idx_t'(WAYS) + idx_t'(l)) < n_r;

  assign y_rd_en  = ((state == H_SCAN) || (state == H_COUNT)) && (grp < n_grp);
  assign y_rd_grp = grp;

  // divider for 1/gs0, 1/gs1, 1/N
  logic             div_start, div_busy, div_done;
  logic [NUM_W-1:0] div_num, div_quo;
  logic [DEN_W-1:0] div_den;
  seq_div #(.NUM_W(NUM_W), .DEN_W(DEN_W)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quo(div_quo));

  // grid location, four lanes
  logic [GRID_LOG2-1:0] ci [WAYS], cj [WAYS];
  logic [CW-1:0]        caddr [WAYS];
  for (genvar l = 0; l < WAYS; l++) begin : g_loc
    grid_locate #(.GRID_LOG2(GRID_LOG2), .INV_W(INV_W)) u_l0 (
      .y(y_rd_data[l].y0), .ymin(ymin0), .inv(inv0), .cidx(ci[l]));
    grid_locate #(.GRID_LOG2(GRID_LOG2), .INV_W(INV_W)) u_l1 (
      .y(y_rd_data[l].y1), .ymin(ymin1), .inv(inv1), .cidx(cj[l]));
    // address = i + j * g: the shift of j by log2 g
    assign caddr[l] = CW'({cj[l], ci[l]});
  end

  // probability, log and product, four lanes, then the adder tree
  logic [23:0]  term [WAYS];
  logic [25:0]  tree;
  for (genvar l = 0; l < WAYS; l++) begin : g_ent
    logic [IDX_W-1:0] n_c;
    logic [IDX_W+31:0] pw;
    logic [31:0]       p;
    logic signed [23:0] lg;
    logic              pz;
    logic [55:0]       pl;
    assign n_c = cnt[CW'(cbase) + CW'(l)];
    assign pw  = (IDX_W+32)'(n_c) * (IDX_W+32)'(inv_n);
    assign p   = (pw[IDX_W+31:32] != 0) ? 32'hFFFF_FFFF : pw[31:0];
    log2_fx #(.IN_W(32), .IN_FRAC(32)) u_log (.x(p), .y(lg), .zero(pz));
    assign pl   = 56'(p) * 56'(24'(-lg));
    assign term[l] = pz ? 24'd0 : pl[55:32];
  end
  always_comb begin
    tree = '0;
    for (int l = 0; l < WAYS; l++) tree = tree + 26'(term[l]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= H_IDLE;
      n_r       <= '0;
      grp       <= '0;
      rd_q      <= 1'b0;
      lane_ok_q <= '0;
      ymin0 <= '0; ymin1 <= '0; ymax0 <= '0; ymax1 <= '0;
      inv0  <= '0; inv1  <= '0; inv_n <= '0;
      div_start <= 1'b0; div_num <= '0; div_den <= '0;
      cbase     <= '0;
      acc       <= '0;
      entropy   <= '0;
      done      <= 1'b0;
      for (int c = 0; c < CELLS; c++) cnt[c] <= '0;
    end else begin
      done      <= 1'b0;
      div_start <= 1'b0;
      rd_q      <= y_rd_en;
      lane_ok_q <= lane_ok;
      if (y_rd_en) grp <= grp + 1'b1;
      unique case (state)
        H_IDLE: if (start) begin
          n_r   <= (n_points == 0) ? idx_t'(1) : n_points;
          grp   <= '0;
          ymin0 <= 16'sh7FFF; ymin1 <= 16'sh7FFF;
          ymax0 <= 16'sh8000; ymax1 <= 16'sh8000;
          state <= H_SCAN;
        end
        H_SCAN, H_SCAN_W: begin
          if (rd_q) begin
            coord_t mn0, mx0, mn1, mx1;
            mn0 = ymin0; mx0 = ymax0; mn1 = ymin1; mx1 = ymax1;
            for (int l = 0; l < WAYS; l++)
              if (lane_ok_q[l]) begin
                if (y_rd_data[l].y0 < mn0) mn0 = y_rd_data[l].y0;
                if (y_rd_data[l].y0 > mx0) mx0 = y_rd_data[l].y0;
                if (y_rd_data[l].y1 < mn1) mn1 = y_rd_data[l].y1;
                if (y_rd_data[l].y1 > mx1) mx1 = y_rd_data[l].y1;
              end
            ymin0 <= mn0; ymax0 <= mx0; ymin1 <= mn1; ymax1 <= mx1;
          end
          if (state == H_SCAN && !y_rd_en) state <= H_SCAN_W;
          if (state == H_SCAN_W) begin
            state     <= H_DIV0;
            div_num   <= NUM_W'(G) << 16;
            div_den   <= DEN_W'(17'($signed({ymax0[15], ymax0}) - $signed({ymin0[15], ymin0})));
            div_start <= 1'b1;
          end
        end
        H_DIV0: if (div_done) begin
          inv0      <= (div_den == 0) ? '0 : INV_W'(div_quo);
          div_num   <= NUM_W'(G) << 16;
          div_den   <= DEN_W'(17'($signed({ymax1[15], ymax1}) - $signed({ymin1[15], ymin1})));
          div_start <= 1'b1;
          state     <= H_DIV1;
        end
        H_DIV1: if (div_done) begin
          inv1      <= (div_den == 0) ? '0 : INV_W'(div_quo);
          div_num   <= NUM_W'(1) << 32;
          div_den   <= DEN_W'(n_r);
          div_start <= 1'b1;
          state     <= H_DIVN;
        end
        H_DIVN: if (div_done) begin
          inv_n <= (div_quo[32]) ? 32'hFFFF_FFFF : div_quo[31:0];
          for (int c = 0; c < CELLS; c++) cnt[c] <= '0;
          grp   <= '0;
          state <= H_COUNT;
        end
        H_COUNT, H_COUNT_W: begin
          if (rd_q)
            for (int c = 0; c < CELLS; c++) begin
              logic [IDX_W-1:0] hits;
              hits = '0;
              for (int l = 0; l < WAYS; l++)
                if (lane_ok_q[l] && caddr[l] == CW'(c)) hits = hits + 1'b1;
              cnt[c] <= cnt[c] + hits;
            end
          if (state == H_COUNT && !y_rd_en) state <= H_COUNT_W;
          if (state == H_COUNT_W) begin
            cbase <= '0;
            acc   <= '0;
            state <= H_SUM;
          end
        end
        H_SUM: begin
          acc <= acc + ENT_W'(tree);
          if (int'(cbase) + WAYS >= CELLS) state <= H_DONE;
          else cbase <= cbase + CW'(WAYS);
        end
        H_DONE: begin
          entropy <= acc;
          done    <= 1'b1;
          state   <= H_IDLE;
        end
        default: state <= H_IDLE;
      endcase
    end
  end

  initial assert (CELLS % WAYS == 0) else $error("entropy_unit: g*g must be a multiple of WAYS");
endmodule
