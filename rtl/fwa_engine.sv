// fwa_engine: the fireworks (FWA) search accelerator for one point i.
// Finds sigma_i* = argmin |R_i(sigma) - Pi_t| over [lo, hi] (Algorithm 2).
//
// LANES fireworks are searched side by side, one per bank of the four
// population RAMs. Per generation t (0 .. T-1):
//   load     fireworks of generation t are read back from NPOP RAM[t];
//            amplitude A = max(fitness, A_MIN) (worse firework, wider range);
//            spark count m_l = m - floor(rank_l * m / LANES), rank_l = 0
//            for the best firework (better firework, more sparks)
//   explode  m rounds: RAND -> add/mul column -> sparks s = fw + A*bias,
//            sent to the Evaluate Module (POP OUT), fitness back (REWD IN),
//            {s, f} written to SPK RAM[r]; all lanes run in lock step, so
//            a lane with m_l < m also fills rounds m_l .. m-1, but those
//            entries are not part of its spark set
//   elite    SPK RAM is read out through the arg min and arg max units,
//            which see only the lane's first m_l entries;
//            the elite spark goes to POP RAM[t mod 32], delta = fmax - fmin
//   mutate   elite is read from POP RAM, mutant = clip(elite + delta),
//            evaluated, {mutant, f} written to MUT RAM[t mod 32]
//   select   the NPOP arg min picks, per lane, the best of firework, elite
//            and mutant; the result is written to NPOP RAM[t+1]
// Finally NPOP RAM[T] is read and the best lane is returned with `done`.
// Generation 0 fireworks are random points of [lo, hi], evaluated once.
// Cost: 1 + T*(m+1) evaluation rounds plus about m + 12 cycles per generation.
// Handshakes: pop_valid/pop_ready (held until accepted); rewd_valid is a
// one-cycle pulse carrying all lanes' fitness.
// The phases, RAMs and units and the rule "better fireworks make more sparks
// in a smaller range" follow the source; per-lane selection, the amplitude
// and spark-count formulas and the RAM addressing are this design's.
module fwa_engine
  import adapsne_pkg::*;
#(
  parameter int unsigned LANES = 8,
  parameter sigma_t      A_MIN = 16'h0040,       // 0.25
  parameter logic [31:0] SEED  = 32'h1234_5678
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] num_sparks,   // m, 1..128
  input  logic [7:0] num_gens,     // T, 1..127
  input  sigma_t     lo,
  input  sigma_t     hi,
  output logic       busy,
  output logic       done,
  output entry_t     best,
  // POP OUT
  output logic       pop_valid,
  input  logic       pop_ready,
  output sigma_t     pop_sigma [LANES],
  // REWD IN
  input  logic       rewd_valid,
  input  fit_t       rewd_fit  [LANES]
);
  localparam int unsigned SPK_BITS = 4096, POP_BITS = 1024, MUT_BITS = 1024, NPOP_BITS = 4096;
  localparam int unsigned SPK_AW = $clog2(SPK_BITS / 32);
  localparam int unsigned POP_AW = $clog2(POP_BITS / 32);

  typedef enum logic [4:0] {
    F_IDLE, F_INIT, F_INIT_W, F_LOAD, F_LOAD2, F_SPARK, F_SPARK_W,
    F_SCAN, F_SCAN_W1, F_ELITE, F_MUT_RD, F_MUT, F_MUT_W,
    F_SEL0, F_SEL1, F_SEL2, F_SEL3, F_SEL4, F_FIN, F_FIN2
  } fstate_t;
  fstate_t state;

  logic [7:0] m_r, t_r, gen, r_cnt;
  sigma_t     lo_r, hi_r;
  sigma_t     fw     [LANES];
  fit_t       fw_fit [LANES];
  sigma_t     cand   [LANES];     // candidates in flight
  sigma_t     amp    [LANES];
  logic [7:0] m_l    [LANES];     // spark count of each firework
  logic [7:0] scan_r;             // SPK RAM round being compared

  // RAND and add/mul column
  logic        rnd_next;
  logic [15:0] rnd [LANES];
  sigma_t      gen_sig [LANES];
  fwa_rand #(.LANES(LANES), .SEED(SEED)) u_rand (.clk, .rst_n, .next(rnd_next), .rnd(rnd));
  fwa_add_mul #(.LANES(LANES)) u_addmul (
    .init_mode(state == F_INIT), .rnd(rnd), .fw(fw), .amp(amp),
    .lo(lo_r), .hi(hi_r), .spark(gen_sig));

  always_comb
    for (int l = 0; l < LANES; l++) amp[l] = (fw_fit[l] > A_MIN) ? fw_fit[l] : A_MIN;

  // RAMs
  logic spk_we, spk_re, pop_we, pop_re, mut_we, mut_re, npop_we, npop_re;
  logic [SPK_AW-1:0] spk_waddr, spk_raddr, npop_waddr, npop_raddr;
  logic [POP_AW-1:0] pm_addr;
  entry_t cand_entry [LANES];
  entry_t spk_rd [LANES], pop_rd [LANES], mut_rd [LANES], npop_rd [LANES];
  entry_t npop_wd [LANES];
  entry_t elite [LANES], worst [LANES], sel_best [LANES], sel_in [LANES];
  entry_t min_in [LANES], max_in [LANES];

  always_comb
    for (int l = 0; l < LANES; l++) cand_entry[l] = '{sigma: cand[l], fit: rewd_fit[l]};

  fwa_ram #(.BANKS(LANES), .BANK_BITS(SPK_BITS)) u_spk_ram (
    .clk, .we(spk_we), .waddr(spk_waddr), .wdata(cand_entry),
    .re(spk_re), .raddr(spk_raddr), .rdata(spk_rd));
  fwa_ram #(.BANKS(LANES), .BANK_BITS(POP_BITS)) u_pop_ram (
    .clk, .we(pop_we), .waddr(pm_addr), .wdata(elite),
    .re(pop_re), .raddr(pm_addr), .rdata(pop_rd));
  fwa_ram #(.BANKS(LANES), .BANK_BITS(MUT_BITS)) u_mut_ram (
    .clk, .we(mut_we), .waddr(pm_addr), .wdata(cand_entry),
    .re(mut_re), .raddr(pm_addr), .rdata(mut_rd));
  fwa_ram #(.BANKS(LANES), .BANK_BITS(NPOP_BITS)) u_npop_ram (
    .clk, .we(npop_we), .waddr(npop_waddr), .wdata(npop_wd),
    .re(npop_re), .raddr(npop_raddr), .rdata(npop_rd));

  // arg min / arg max units; rounds beyond a lane's spark count are shown
  // to them as the worst (arg min) or best (arg max) possible entry, which
  // never replaces a real one because ties keep the earlier entry
  always_comb
    for (int l = 0; l < LANES; l++) begin
      min_in[l] = spk_rd[l];
      max_in[l] = spk_rd[l];
      if (scan_r >= m_l[l]) begin
        min_in[l].fit = '1;
        max_in[l].fit = '0;
      end
    end

  // spark count from the fitness rank of the fireworks being loaded
  logic [7:0] m_new [LANES];
  always_comb
    for (int l = 0; l < LANES; l++) begin
      logic [$clog2(LANES+1)-1:0] rank;
      logic [15:0] cut;
      rank = '0;
      for (int k = 0; k < LANES; k++)
        if (npop_rd[k].fit < npop_rd[l].fit || (npop_rd[k].fit == npop_rd[l].fit && k < l))
          rank = rank + 1'b1;
      cut      = (16'(rank) * 16'(m_r)) >> $clog2(LANES);
      m_new[l] = m_r - 8'(cut);
    end

  logic scan_valid;
  logic sel_valid;
  fwa_argext #(.LANES(LANES), .FIND_MAX(1'b0)) u_spk_argmin (
    .clk, .rst_n, .clear(state == F_LOAD), .in_valid(scan_valid), .in_entry(min_in), .best(elite));
  fwa_argext #(.LANES(LANES), .FIND_MAX(1'b1)) u_spk_argmax (
    .clk, .rst_n, .clear(state == F_LOAD), .in_valid(scan_valid), .in_entry(max_in), .best(worst));
  fwa_argext #(.LANES(LANES), .FIND_MAX(1'b0)) u_npop_argmin (
    .clk, .rst_n, .clear(state == F_SEL0), .in_valid(sel_valid), .in_entry(sel_in), .best(sel_best));

  // mutation
  fit_t   emin [LANES], emax [LANES];
  sigma_t pop_sig [LANES], mutant [LANES];
  always_comb
    for (int l = 0; l < LANES; l++) begin
      emin[l]    = elite[l].fit;
      emax[l]    = worst[l].fit;
      pop_sig[l] = pop_rd[l].sigma;
    end
  fwa_mutate #(.LANES(LANES)) u_mutate (
    .clk, .rst_n, .load_delta(state == F_ELITE), .fmin(emin), .fmax(emax),
    .elite(pop_sig), .lo(lo_r), .hi(hi_r), .delta(), .mutant(mutant));

  // control signals
  always_comb begin
    pop_valid  = (state == F_INIT) || (state == F_SPARK) || (state == F_MUT);
    for (int l = 0; l < LANES; l++) begin
      pop_sigma[l] = (state == F_MUT) ? mutant[l] : gen_sig[l];
      unique case (state)
        F_SEL1:  sel_in[l] = '{sigma: fw[l], fit: fw_fit[l]};
        F_SEL2:  sel_in[l] = elite[l];
        default: sel_in[l] = mut_rd[l];
      endcase
      npop_wd[l] = (state == F_INIT_W) ? cand_entry[l] : sel_best[l];
    end
    sel_valid  = (state == F_SEL1) || (state == F_SEL2) || (state == F_SEL3);
    rnd_next   = pop_valid && pop_ready && (state != F_MUT);
    spk_we     = (state == F_SPARK_W) && rewd_valid;
    spk_waddr  = SPK_AW'(r_cnt);
    spk_re     = (state == F_SCAN);
    spk_raddr  = SPK_AW'(r_cnt);
    pm_addr    = POP_AW'(gen);
    pop_we     = (state == F_ELITE);
    pop_re     = (state == F_MUT_RD);
    mut_we     = (state == F_MUT_W) && rewd_valid;
    mut_re     = (state == F_SEL0);
    npop_we    = ((state == F_INIT_W) && rewd_valid) || (state == F_SEL4);
    npop_waddr = (state == F_INIT_W) ? '0 : SPK_AW'(gen + 8'd1);
    npop_re    = (state == F_LOAD) || (state == F_FIN);
    npop_raddr = SPK_AW'(gen);
    busy       = (state != F_IDLE);
  end

  // best of the final population
  entry_t fin_best;
  always_comb begin
    fin_best = npop_rd[0];
    for (int l = 1; l < LANES; l++)
      if (npop_rd[l].fit < fin_best.fit) fin_best = npop_rd[l];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= F_IDLE;
      done       <= 1'b0;
      best       <= '0;
      m_r        <= '0;
      t_r        <= '0;
      gen        <= '0;
      r_cnt      <= '0;
      lo_r       <= '0;
      hi_r       <= '0;
      scan_valid <= 1'b0;
      scan_r     <= '0;
      for (int l = 0; l < LANES; l++) begin
        fw[l] <= '0; fw_fit[l] <= '0; cand[l] <= '0; m_l[l] <= '0;
      end
    end else begin
      done       <= 1'b0;
      scan_valid <= spk_re;
      scan_r     <= r_cnt;
      unique case (state)
        F_IDLE: if (start) begin
          m_r   <= (num_sparks == 0) ? 8'd1 : (num_sparks > 8'd128 ? 8'd128 : num_sparks);
          t_r   <= (num_gens == 0) ? 8'd1 : (num_gens > 8'd127 ? 8'd127 : num_gens);
          lo_r  <= lo;
          hi_r  <= (hi < lo) ? lo : hi;
          gen   <= '0;
          state <= F_INIT;
        end
        F_INIT: if (pop_ready) begin
          for (int l = 0; l < LANES; l++) cand[l] <= gen_sig[l];
          state <= F_INIT_W;
        end
        F_INIT_W: if (rewd_valid) state <= F_LOAD;   // NPOP RAM[0] written
        F_LOAD:  state <= F_LOAD2;                   // read NPOP RAM[gen]
        F_LOAD2: begin
          for (int l = 0; l < LANES; l++) begin
            fw[l]     <= npop_rd[l].sigma;
            fw_fit[l] <= npop_rd[l].fit;
            m_l[l]    <= m_new[l];
          end
          r_cnt <= '0;
          state <= F_SPARK;
        end
        F_SPARK: if (pop_ready) begin
          for (int l = 0; l < LANES; l++) cand[l] <= gen_sig[l];
          state <= F_SPARK_W;
        end
        F_SPARK_W: if (rewd_valid) begin            // SPK RAM[r] written
          if (r_cnt == m_r - 1) begin
            r_cnt <= '0;
            state <= F_SCAN;
          end else begin
            r_cnt <= r_cnt + 1'b1;
            state <= F_SPARK;
          end
        end
        F_SCAN: begin                               // read SPK RAM[r]
          if (r_cnt == m_r - 1) state <= F_SCAN_W1;
          else                  r_cnt <= r_cnt + 1'b1;
        end
        F_SCAN_W1: state <= F_ELITE;                // last entry compared
        F_ELITE:   state <= F_MUT_RD;               // POP RAM written, delta latched
        F_MUT_RD:  state <= F_MUT;                  // read POP RAM
        F_MUT: if (pop_ready) begin
          for (int l = 0; l < LANES; l++) cand[l] <= mutant[l];
          state <= F_MUT_W;
        end
        F_MUT_W: if (rewd_valid) state <= F_SEL0;    // MUT RAM written
        F_SEL0: state <= F_SEL1;                    // read MUT RAM
        F_SEL1: state <= F_SEL2;
        F_SEL2: state <= F_SEL3;
        F_SEL3: state <= F_SEL4;
        F_SEL4: begin                               // NPOP RAM[gen+1] written
          gen <= gen + 1'b1;
          if (gen + 1'b1 == t_r) state <= F_FIN;
          else                   state <= F_LOAD;
        end
        F_FIN:  state <= F_FIN2;                    // read NPOP RAM[T]
        F_FIN2: begin
          best  <= fin_best;
          done  <= 1'b1;
          state <= F_IDLE;
        end
        default: state <= F_IDLE;
      endcase
    end
  end

  a_pop_hold: assert property (@(posedge clk) disable iff (!rst_n)
    pop_valid && !pop_ready |=> pop_valid);
endmodule
