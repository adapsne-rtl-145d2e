// perp_eval: one lane of the Evaluate Module. Computes the fireworks
// fitness f(sigma) = |R_i(sigma) - Pi_t| of one candidate sigma for point i,
// with R_i = 2^H the perplexity of the conditional distribution p_{j|i}.
//
// How it works. With u_j = d_ij * log2(e) / (2 sigma^2) and e_j = 2^(-u_j),
// p_{j|i} = e_j / S where S = sum e_j, so
//     H = -sum p log2 p = log2 S + T / S,   T = sum e_j u_j.
// 1. start: k = log2(e) / (2 sigma^2) by the sequential divider (k_ready).
// 2. one squared distance per d_valid: u = d*k, e = 2^-u from a table,
//    S += e, T += e*u (single cycle per neighbour).
// 3. fin: T/S by the divider, H = log2 S + T/S, R = 2^H, fit = |R - Pi_t|,
//    done pulses with fit.
// Interface timing: k_ready rises about 58 cycles after start; then one
// distance per cycle; done about 60 cycles after fin.
// The fitness definition follows the source; the log/exp decomposition,
// the tables and all number formats (see adapsne_pkg) are this design's.
// sigma = 0 is treated as the smallest representable sigma; a point whose
// kernel underflows everywhere (S = 0) gets H = 0, R = 1.
module perp_eval
  import adapsne_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  sigma_t sigma,
  input  sigma_t perp_t,
  output logic   k_ready,
  input  logic   d_valid,
  input  dist_t  d,
  input  logic   fin,
  output logic   done,
  output fit_t   fit
);
  localparam int unsigned SW = 17 + IDX_W;   // sum of e (Q.16)
  localparam int unsigned TW = 33 + IDX_W;   // sum of e*u (Q.24)
  localparam int unsigned NW = TW;           // divider numerator width
  localparam int unsigned DW = SW;           // divider denominator width

  typedef enum logic [2:0] {S_IDLE, S_KDIV, S_ACC, S_TDIV, S_POW} state_t;
  state_t state;

  sigma_t          perp_r;
  logic [31:0]     k_r;
  logic [SW-1:0]   s_acc;
  logic [TW-1:0]   t_acc;
  logic signed [17:0] h_q8;

  // divider shared by k and T/S
  logic            div_start, div_busy, div_done;
  logic [NW-1:0]   div_num, div_quo;
  logic [DW-1:0]   div_den;
  seq_div #(.NUM_W(NW), .DEN_W(DW)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quo(div_quo));

  // per-neighbour datapath
  logic [47:0] ud_prod;
  logic [15:0] u;
  logic [16:0] e;
  assign ud_prod = 48'(d) * 48'(k_r);
  assign u       = (ud_prod[47:32] != 0) ? 16'hFFFF : ud_prod[31:16];
  exp2_fx u_exp (.u(u), .e(e));

  // log2 S (Q.16 signed)
  logic signed [23:0] log2s;
  logic               s_zero;
  log2_fx #(.IN_W(SW), .IN_FRAC(16)) u_log (.x(s_acc), .y(log2s), .zero(s_zero));

  // R = 2^H, H in Q8.8 (0 <= H)
  logic [16:0] pow_e;
  logic [7:0]  hf;
  logic [7:0]  hi;
  logic [33:0] r_wide;
  logic [15:0] r_q8;
  assign hf = h_q8[7:0];
  assign hi = h_q8[15:8];
  exp2_fx u_pow (.u({8'd0, 8'(9'd256 - {1'b0, hf})}), .e(pow_e));
  always_comb begin
    logic [17:0] p;   // 2^(hf/256), Q1.16
    p = (hf == 0) ? 18'd65536 : {pow_e, 1'b0};
    if (hi >= 8'd8) r_wide = '1;
    else            r_wide = (34'(p) << hi) >> 8;
    r_q8 = (r_wide[33:16] != 0) ? 16'hFFFF : r_wide[15:0];
  end

  logic [31:0] sq;
  assign sq = (sigma == 0) ? 32'd1 : 32'(sigma) * 32'(sigma);  // Q16.16

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      k_ready <= 1'b0;
      done    <= 1'b0;
      fit     <= '0;
      perp_r  <= '0;
      k_r     <= '0;
      s_acc   <= '0;
      t_acc   <= '0;
      h_q8    <= '0;
      div_start <= 1'b0;
      div_num <= '0;
      div_den <= '0;
    end else begin
      done      <= 1'b0;
      div_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          perp_r    <= perp_t;
          s_acc     <= '0;
          t_acc     <= '0;
          k_ready   <= 1'b0;
          // k (Q.16) = log2(e) * 2^23 * 2^16 / sigma^2(Q16.16) / 2^... :
          // u(Q8.8) = d * k >> 16 with k = log2e * 2^39 / (2 * sq)
          div_num   <= NW'(LOG2E_Q23 << 16);
          div_den   <= DW'(sq);
          div_start <= 1'b1;
          state     <= S_KDIV;
        end
        S_KDIV: if (div_done) begin
          k_r     <= (div_quo[NW-1:32] != 0) ? 32'hFFFF_FFFF : div_quo[31:0];
          k_ready <= 1'b1;
          state   <= S_ACC;
        end
        S_ACC: begin
          if (d_valid) begin
            s_acc <= s_acc + SW'(e);
            t_acc <= t_acc + TW'(33'(e) * 33'(u));
          end
          if (fin) begin
            k_ready <= 1'b0;
            if (s_acc == 0) begin
              h_q8  <= '0;
              state <= S_POW;
            end else begin
              div_num   <= NW'(t_acc);
              div_den   <= DW'(s_acc);
              div_start <= 1'b1;
              state     <= S_TDIV;
            end
          end
        end
        S_TDIV: if (div_done) begin
          logic signed [NW+1:0] h;
          h = $signed({2'b0, div_quo}) + (NW+2)'(log2s >>> 8);
          if (h < 0)                 h_q8 <= '0;
          else if (h > 65535)        h_q8 <= 18'sd65535;
          else                       h_q8 <= 18'(h);
          state <= S_POW;
        end
        S_POW: begin
          fit   <= (r_q8 >= perp_r) ? r_q8 - perp_r : perp_r - r_q8;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
