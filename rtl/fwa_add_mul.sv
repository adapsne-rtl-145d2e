// fwa_add_mul: the adder/multiplier column between RAND and SPK RAM.
// Turns random words into candidate sigmas for all lanes at once.
//
// init_mode = 1 (initial fireworks):  s = lo + (rnd * (hi - lo)) >> 16
// init_mode = 0 (explosion, Alg. 2):  s = clip(fw + A * bias, lo, hi)
//   with bias = rnd read as signed Q1.15 in [-1, 1) and A in Q8.8.
// Combinational. The spark formula is the source's; the bias format, the
// initial-firework mapping and clipping sparks to [lo, hi] are this design's.
module fwa_add_mul
  import adapsne_pkg::*;
#(
  parameter int unsigned LANES = 8
) (
  input  logic        init_mode,
  input  logic [15:0] rnd   [LANES],
  input  sigma_t      fw    [LANES],
  input  sigma_t      amp   [LANES],
  input  sigma_t      lo,
  input  sigma_t      hi,
  output sigma_t      spark [LANES]
);
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [32:0] prod;    // Q8.8 * Q1.15 = Q9.23
      logic signed [19:0] sum;
      logic [31:0]        span;
      prod = $signed({1'b0, 16'(amp[l])}) * $signed(rnd[l]);
      sum  = $signed({4'b0, fw[l]}) + 20'(prod >>> 15);
      span = 32'(rnd[l]) * 32'(hi - lo);
      if (init_mode) spark[l] = lo + sigma_t'(span >> 16);
      else           spark[l] = clip_sigma(sum, lo, hi);
    end
  end
endmodule
