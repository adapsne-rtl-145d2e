// tb_fwa_mutate: delta = fmax - fmin is latched on load_delta only, and
// mutant = clip(elite + delta, lo, hi) per lane.
module tb_fwa_mutate;
  import adapsne_pkg::*;
  localparam int unsigned LANES = 8;
  logic clk = 0, rst_n = 0, load_delta = 0;
  fit_t fmin [LANES], fmax [LANES], delta [LANES];
  sigma_t elite [LANES], mutant [LANES], lo, hi;
  int ref_delta [LANES];
  int checks = 0, failures = 0, clips = 0;

  fwa_mutate #(.LANES(LANES)) dut (.clk, .rst_n, .load_delta, .fmin, .fmax, .elite, .lo, .hi, .delta, .mutant);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lo = 16'h0100; hi = 16'h6400;   // [1, 100]
    for (int l = 0; l < LANES; l++) ref_delta[l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      load_delta = ($urandom_range(0, 1) == 1);
      for (int l = 0; l < LANES; l++) begin
        fmin[l]  = 16'($urandom_range(0, 3000));
        fmax[l]  = fmin[l] + 16'($urandom_range(0, 6000));
        elite[l] = 16'($urandom_range(256, 25600));
      end
      @(negedge clk);
      if (load_delta) for (int l = 0; l < LANES; l++) ref_delta[l] = int'(fmax[l]) - int'(fmin[l]);
      load_delta = 0;
      for (int l = 0; l < LANES; l++) elite[l] = 16'($urandom_range(256, 25600));
      #1;
      for (int l = 0; l < LANES; l++) begin
        int e;
        e = int'(elite[l]) + ref_delta[l];
        if (e > int'(hi)) begin e = hi; clips++; end
        checks += 2;
        if (delta[l] !== 16'(ref_delta[l])) failures++;
        if (mutant[l] !== 16'(e)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d l=%0d got %0d exp %0d", t, l, mutant[l], e);
        end
      end
    end
    checks++;
    if (clips == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
