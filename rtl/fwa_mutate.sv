// fwa_mutate: mutation stage of the fireworks accelerator (subtractor,
// delta registers and adder row of the datapath).
//
// load_delta latches, per lane, delta = f_max - f_min of the current
// sparks. The combinational output is the mutated firework
//   mutant = clip(elite sigma + delta, lo, hi)
// where the elite comes from POP RAM. delta (a fitness difference, Q8.8)
// is added to sigma (Q8.8) as a plain number, as the source's algorithm
// does. Taking the elite spark rather than the firework as the base
// follows the datapath drawing; the algorithm listing writes the firework.
module fwa_mutate
  import adapsne_pkg::*;
#(
  parameter int unsigned LANES = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   load_delta,
  input  fit_t   fmin  [LANES],
  input  fit_t   fmax  [LANES],
  input  sigma_t elite [LANES],
  input  sigma_t lo,
  input  sigma_t hi,
  output fit_t   delta [LANES],
  output sigma_t mutant [LANES]
);
  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      if (!rst_n)          delta[l] <= '0;
      else if (load_delta) delta[l] <= fmax[l] - fmin[l];
    end
  end

  always_comb begin
    for (int l = 0; l < LANES; l++)
      mutant[l] = clip_sigma($signed({4'b0, elite[l]}) + $signed({4'b0, delta[l]}), lo, hi);
  end

  // the maximum is never below the minimum
  for (genvar l = 0; l < LANES; l++) begin : g_chk
    a_order: assert property (@(posedge clk) disable iff (!rst_n)
      load_delta |-> fmax[l] >= fmin[l]);
  end
endmodule
