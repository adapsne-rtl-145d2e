// fwa_argext: streaming arg-min / arg-max unit, one comparator per lane.
//
// `clear` starts a new search. Each cycle with in_valid, every lane compares
// its input entry's fitness with the best seen so far and keeps the smaller
// (FIND_MAX = 0) or larger (FIND_MAX = 1) one; ties keep the earlier entry.
// best is valid from the cycle after the last in_valid. Used as the SPK
// arg min (elite spark), SPK arg max (for delta) and NPOP arg min (next
// firework). Comparators follow the source's arg min / arg max boxes; the
// streaming form is this design's.
module fwa_argext
  import adapsne_pkg::*;
#(
  parameter int unsigned LANES    = 8,
  parameter bit          FIND_MAX = 1'b0
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   in_valid,
  input  entry_t in_entry [LANES],
  output entry_t best     [LANES]
);
  logic first;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      first <= 1'b1;
      for (int l = 0; l < LANES; l++) best[l] <= '0;
    end else if (clear) begin
      first <= 1'b1;
    end else if (in_valid) begin
      first <= 1'b0;
      for (int l = 0; l < LANES; l++) begin
        if (first) best[l] <= in_entry[l];
        else if (FIND_MAX ? (in_entry[l].fit > best[l].fit)
                          : (in_entry[l].fit < best[l].fit))
          best[l] <= in_entry[l];
      end
    end
  end
endmodule
