// log2_fx: signed log2 of an unsigned fixed-point value, result Q.16.
//
// x is IN_W bits wide with IN_FRAC fractional bits. The position of the
// leading one gives the integer part of the logarithm; the next 8 bits
// index a 256-entry table of log2(1 + m/256). x = 0 returns the most
// negative value and raises `zero`. Combinational; used for log2 S in the
// Evaluate Module and for log2 p in the entropy unit. The table method is
// this design's choice (the source draws only a "log" box).
module log2_fx
  import adapsne_pkg::*;
#(
  parameter int unsigned IN_W    = 32,
  parameter int unsigned IN_FRAC = 16
) (
  input  logic [IN_W-1:0]  x,
  output logic signed [23:0] y,
  output logic             zero
);
  localparam log2_lut_t LUT = gen_log2_lut();

  logic [$clog2(IN_W)-1:0] pos;
  logic [IN_W+7:0]         norm;
  logic [7:0]              mant;

  always_comb begin
    pos = '0;
    for (int i = 0; i < IN_W; i++)
      if (x[i]) pos = $clog2(IN_W)'(i);
    // Bring the leading one to bit IN_W+7, keep the 8 bits below it.
    norm = {x, 8'b0} << (IN_W - 1 - int'(pos));
    mant = norm[IN_W+6 -: 8];
    zero = (x == '0);
    if (zero) y = {1'b1, 23'b0};
    else      y = 24'((int'(pos) - int'(IN_FRAC)) * 65536) + 24'(LUT[mant]);
  end
endmodule
