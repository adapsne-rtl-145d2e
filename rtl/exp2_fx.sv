// exp2_fx: e = 2^(-u) for an unsigned Q8.8 exponent u, result Q0.16
// (65536 = 1.0). Combinational.
//
// The fractional part of u indexes a 256-entry table of 2^(-f/256); the
// integer part shifts the table value right. Results below 2^-16 are 0.
// Table and formats are this design's choice; the source only requires
// the Gaussian kernel exp(-d / 2 sigma^2), which is 2^(-d log2(e) / 2 sigma^2).
module exp2_fx
  import adapsne_pkg::*;
(
  input  logic [15:0] u,
  output logic [16:0] e
);
  localparam exp2_lut_t LUT = gen_exp2_lut();

  always_comb begin
    if (u[15:8] > 8'd16) e = '0;
    else                 e = LUT[u[7:0]] >> u[15:8];
  end
endmodule
