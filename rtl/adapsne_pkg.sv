// adapsne_pkg: number formats, shared types and table generators of the
// AdapSNE sampling accelerator.
//
// Formats (the source describes none; these are this design's choices):
//   sigma, perplexity, fitness : unsigned Q8.8, 16 bit
//   squared distance           : unsigned integer, 16 bit
//   low-dimensional coordinate : signed Q8.8, 16 bit
//   entropy                    : unsigned Q8.16 in bits (log base 2), 24 bit
// A population word in the FWA RAMs is {sigma, fitness}, 32 bit.
//
// The two lookup tables used by the arithmetic (2^-f and log2(1+f), 256
// entries each) are produced here by constant functions with integer-only
// arithmetic, so no table file is needed:
//   exp2neg_entry(i)   = round(2^(-i/256) * 2^16)          (repeated product
//                        with round(2^(-1/256) * 2^32))
//   log2frac_entry(m)  = floor(log2(1 + m/256) * 2^16)     (bit-by-bit
//                        squaring method)
package adapsne_pkg;

  localparam int unsigned SIG_W   = 16;  // Q8.8
  localparam int unsigned FIT_W   = 16;  // Q8.8
  localparam int unsigned DIST_W  = 16;  // integer
  localparam int unsigned COORD_W = 16;  // signed Q8.8
  localparam int unsigned ENT_W   = 24;  // Q8.16
  localparam int unsigned IDX_W   = 21;  // point index, up to 2,097,152 points

  typedef logic [SIG_W-1:0]          sigma_t;
  typedef logic [FIT_W-1:0]          fit_t;
  typedef logic [DIST_W-1:0]         dist_t;
  typedef logic signed [COORD_W-1:0] coord_t;
  typedef logic [ENT_W-1:0]          ent_t;
  typedef logic [IDX_W-1:0]          idx_t;

  // One candidate solution of the fireworks search.
  typedef struct packed {
    sigma_t sigma;
    fit_t   fit;
  } entry_t;

  // One low-dimensional point y = (y0, y1).
  typedef struct packed {
    coord_t y0;
    coord_t y1;
  } point_t;

  // Run-time configuration of the whole accelerator.
  typedef struct packed {
    idx_t        n_points;    // N
    sigma_t      perp0;       // initial target perplexity, Q8.8
    logic [7:0]  num_sparks;  // m sparks per firework (1..128)
    logic [7:0]  num_gens;    // T generations (1..127)
    sigma_t      sigma_lo;    // search range of sigma, Q8.8
    sigma_t      sigma_hi;
    logic [7:0]  max_iters;   // cap on entropy-guided iterations
    idx_t        quota;       // exemplars kept per grid cell
  } cfg_t;

  // log2(e) * 2^23, used to form log2(e) / (2 sigma^2).
  localparam longint unsigned LOG2E_Q23 = 64'd12102203;
  // 2^(-1/256) * 2^32
  localparam longint unsigned EXP2_STEP_Q32 = 64'd4283353945;

  function automatic logic [16:0] exp2neg_entry(input int unsigned i);
    longint unsigned v;
    v = 64'd1 << 32;
    for (int unsigned k = 0; k < i; k++) v = (v * EXP2_STEP_Q32) >> 32;
    return 17'((v + 64'd32768) >> 16);
  endfunction

  function automatic logic [15:0] log2frac_entry(input int unsigned m);
    longint unsigned x;
    logic [15:0] r;
    x = (64'd256 + 64'(m)) << 22;  // Q1.30 value in [1,2)
    r = '0;
    for (int b = 15; b >= 0; b--) begin
      x = (x * x) >> 30;
      if (x >= (64'd1 << 31)) begin
        x = x >> 1;
        r[b] = 1'b1;
      end
    end
    return r;
  endfunction

  typedef logic [16:0] exp2_lut_t [256];
  typedef logic [15:0] log2_lut_t [256];

  function automatic exp2_lut_t gen_exp2_lut();
    exp2_lut_t t;
    for (int unsigned i = 0; i < 256; i++) t[i] = exp2neg_entry(i);
    return t;
  endfunction

  function automatic log2_lut_t gen_log2_lut();
    log2_lut_t t;
    for (int unsigned i = 0; i < 256; i++) t[i] = log2frac_entry(i);
    return t;
  endfunction

  function automatic sigma_t clip_sigma(input logic signed [19:0] v,
                                        input sigma_t lo, input sigma_t hi);
    if (v < $signed({4'b0, lo})) return lo;
    if (v > $signed({4'b0, hi})) return hi;
    return sigma_t'(v);
  endfunction

endpackage
