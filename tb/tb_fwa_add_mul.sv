// tb_fwa_add_mul: random sparks and initial fireworks against a reference
// written with plain integers: s = clip(fw + floor(A * bias)), bias = rnd/2^15.
module tb_fwa_add_mul;
  import adapsne_pkg::*;
  localparam int unsigned LANES = 8;
  logic        init_mode;
  logic [15:0] rnd [LANES];
  sigma_t      fw [LANES], amp [LANES], spark [LANES];
  sigma_t      lo, hi;
  int checks = 0, failures = 0;
  int clipped = 0;

  fwa_add_mul #(.LANES(LANES)) dut (.init_mode, .rnd, .fw, .amp, .lo, .hi, .spark);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      longint exp_s;
      lo = 16'($urandom_range(256, 2560));        // 1 .. 10
      hi = 16'($urandom_range(12800, 25600));     // 50 .. 100
      init_mode = (t % 4 == 0);
      for (int l = 0; l < LANES; l++) begin
        rnd[l] = 16'($urandom);
        fw[l]  = 16'($urandom_range(int'(lo), int'(hi)));
        amp[l] = 16'($urandom_range(0, 12800));
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        if (init_mode) exp_s = longint'(lo) + ((longint'(rnd[l]) * longint'(hi - lo)) >>> 16);
        else begin
          longint p;
          p = longint'(amp[l]) * longint'($signed(rnd[l]));
          // floor division by 2^15
          exp_s = longint'(fw[l]) + ((p >= 0) ? p / 32768 : -((-p + 32767) / 32768));
          if (exp_s < longint'(lo)) begin exp_s = lo; clipped++; end
          if (exp_s > longint'(hi)) begin exp_s = hi; clipped++; end
        end
        checks++;
        if (spark[l] !== 16'(exp_s)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d l=%0d got %0d exp %0d", t, l, spark[l], exp_s);
        end
      end
    end
    checks++;
    if (clipped == 0) begin failures++; $display("FAIL clipping never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
