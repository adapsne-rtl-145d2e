// grid_locate: grid cidx of one coordinate, the subtract-multiply-shift
// chain of the entropy datapath.
//   cidx = min(G-1, floor((y - ymin) * inv / 2^16)),  inv = G * 2^16 / range
// so cidx = floor((y - ymin) / gs) with gs = range / G. y is signed Q8.8 and
// must not be below ymin. Combinational. The formula is the source's grid
// location; the reciprocal's Q.16 format is this design's.
module grid_locate
  import adapsne_pkg::*;
#(
  parameter int unsigned GRID_LOG2 = 2,
  parameter int unsigned INV_W     = 16 + GRID_LOG2 + 1
) (
  input  coord_t               y,
  input  coord_t               ymin,
  input  logic [INV_W-1:0]     inv,
  output logic [GRID_LOG2-1:0] cidx
);
  localparam int unsigned G = 1 << GRID_LOG2;
  logic [16:0]        diff;
  logic [INV_W+16:0]  prod;
  logic [INV_W:0]     q;
  always_comb begin
    diff = 17'($signed({y[15], y}) - $signed({ymin[15], ymin}));
    prod = (INV_W+17)'(diff) * (INV_W+17)'(inv);
    q    = (INV_W+1)'(prod >> 16);
    cidx = (q >= (INV_W+1)'(G)) ? GRID_LOG2'(G - 1) : GRID_LOG2'(q);
  end
endmodule
