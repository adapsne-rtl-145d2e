// fwa_rand: RAND block of the fireworks accelerator. Supplies one 16-bit
// random word per lane for firework initialisation and spark bias.
//
// Each lane is an independent 32-bit xorshift generator (x ^= x<<13,
// x ^= x>>17, x ^= x<<5) seeded from SEED and the lane number; `next`
// advances all lanes by one step and rnd shows the upper 16 bits of the
// state, valid in the cycle after reset and after every step.
// The source names the block only; the generator type is this design's.
module fwa_rand #(
  parameter int unsigned LANES = 8,
  parameter logic [31:0] SEED  = 32'h1234_5678
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        next,
  output logic [15:0] rnd [LANES]
);
  logic [31:0] st [LANES];

  function automatic logic [31:0] xorshift(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    // odd multiplier spreads the lane seeds; never zero
    localparam logic [31:0] LSEED = (SEED ^ (32'(l) * 32'h9E37_79B9)) | 32'h1;
    always_ff @(posedge clk) begin
      if (!rst_n)    st[l] <= LSEED;
      else if (next) st[l] <= xorshift(st[l]);
    end
    assign rnd[l] = st[l][31:16];
  end
endmodule
