// fwa_ram: one banked population memory of the fireworks accelerator
// (SPK, POP, MUT and NPOP RAM are all instances of it).
//
// BANKS banks of BANK_BITS bits each, one bank per lane; a word is an
// entry_t {sigma, fitness} of 32 bits, so DEPTH = BANK_BITS / 32. All banks
// share one write port and one read port with a common address because the
// lanes run in lock step. Read data appear one cycle after re.
// Bank count and size follow the source (8 x 4 Kbit for SPK/NPOP,
// 8 x 1 Kbit for POP/MUT); word layout and ports are this design's. Written
// as an array, standing for the SRAM macro a chip would use.
module fwa_ram
  import adapsne_pkg::*;
#(
  parameter int unsigned BANKS     = 8,
  parameter int unsigned BANK_BITS = 4096,
  parameter int unsigned WORD_W    = 32,
  parameter int unsigned DEPTH     = BANK_BITS / WORD_W,
  parameter int unsigned AW        = $clog2(DEPTH)
) (
  input  logic    clk,
  input  logic    we,
  input  logic [AW-1:0] waddr,
  input  entry_t  wdata [BANKS],
  input  logic    re,
  input  logic [AW-1:0] raddr,
  output entry_t  rdata [BANKS]
);
  entry_t mem [BANKS][DEPTH];

  always_ff @(posedge clk) begin
    for (int b = 0; b < BANKS; b++) begin
      if (we) mem[b][waddr] <= wdata[b];
      if (re) rdata[b] <= mem[b][raddr];
    end
  end

  initial assert (WORD_W == $bits(entry_t)) else $error("fwa_ram: WORD_W must match entry_t");
endmodule
