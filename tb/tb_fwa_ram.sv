// tb_fwa_ram: writes random words to all banks of an 8 x 4 Kbit RAM and
// reads them back in random order; checks data and the one-cycle latency.
module tb_fwa_ram;
  import adapsne_pkg::*;
  localparam int unsigned BANKS = 8, BITS = 4096, DEPTH = BITS / 32, AW = $clog2(DEPTH);
  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  entry_t wdata [BANKS], rdata [BANKS];
  entry_t model [BANKS][DEPTH];
  int checks = 0, failures = 0;

  fwa_ram #(.BANKS(BANKS), .BANK_BITS(BITS)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a);
      for (int b = 0; b < BANKS; b++) begin
        wdata[b] = entry_t'($urandom);
        model[b][a] = wdata[b];
      end
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 300; k++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      @(negedge clk); re = 1; raddr = AW'(a);
      @(negedge clk); re = 0;
      for (int b = 0; b < BANKS; b++) begin
        checks++;
        if (rdata[b] !== model[b][a]) begin
          failures++;
          if (failures < 10) $display("FAIL a=%0d b=%0d got %h exp %h", a, b, rdata[b], model[b][a]);
        end
      end
      // data hold while re is low
      @(negedge clk);
      checks++;
      if (rdata[0] !== model[0][a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
