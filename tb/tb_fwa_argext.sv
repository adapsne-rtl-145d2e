// tb_fwa_argext: streams random entries into an arg-min and an arg-max unit
// and compares the winners (first one on ties) with a reference scan.
module tb_fwa_argext;
  import adapsne_pkg::*;
  localparam int unsigned LANES = 8;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  entry_t in_entry [LANES], bmin [LANES], bmax [LANES];
  entry_t rmin [LANES], rmax [LANES];
  int checks = 0, failures = 0;

  fwa_argext #(.LANES(LANES), .FIND_MAX(1'b0)) u_min (.clk, .rst_n, .clear, .in_valid, .in_entry, .best(bmin));
  fwa_argext #(.LANES(LANES), .FIND_MAX(1'b1)) u_max (.clk, .rst_n, .clear, .in_valid, .in_entry, .best(bmax));
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int len;
      len = $urandom_range(1, 40);
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int k = 0; k < len; k++) begin
        in_valid = ($urandom_range(0, 4) != 0) || k == 0;
        for (int l = 0; l < LANES; l++) begin
          // small fitness range so that ties occur
          in_entry[l] = '{sigma: 16'($urandom), fit: 16'($urandom_range(0, 20))};
          if (in_valid) begin
            if (k == 0 || in_entry[l].fit < rmin[l].fit) rmin[l] = in_entry[l];
            if (k == 0 || in_entry[l].fit > rmax[l].fit) rmax[l] = in_entry[l];
          end
        end
        @(negedge clk);
      end
      in_valid = 0;
      for (int l = 0; l < LANES; l++) begin
        checks += 2;
        if (bmin[l] !== rmin[l]) begin failures++; $display("FAIL min t=%0d l=%0d", t, l); end
        if (bmax[l] !== rmax[l]) begin failures++; $display("FAIL max t=%0d l=%0d", t, l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
