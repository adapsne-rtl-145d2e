// tb_fwa_rand: checks the RAND block against an independent xorshift32
// model: reset state, one step per `next`, no step without it, lanes differ.
module tb_fwa_rand;
  localparam int unsigned LANES = 8;
  localparam logic [31:0] SEED = 32'h1234_5678;
  logic clk = 0, rst_n = 0, next = 0;
  logic [15:0] rnd [LANES];
  int checks = 0, failures = 0;
  logic [31:0] model [LANES];

  fwa_rand #(.LANES(LANES), .SEED(SEED)) dut (.clk, .rst_n, .next, .rnd);
  always #5 clk = ~clk;

  function automatic logic [31:0] xs(input logic [31:0] x);
    x ^= x << 13; x ^= x >> 17; x ^= x << 5; return x;
  endfunction

  task automatic check_all();
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (rnd[l] !== model[l][31:16]) begin
        failures++;
        $display("FAIL lane %0d got %h exp %h", l, rnd[l], model[l][31:16]);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < LANES; l++) model[l] = (SEED ^ (32'(l) * 32'h9E37_79B9)) | 32'h1;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    check_all();
    for (int s = 0; s < 200; s++) begin
      next <= ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
      if (next) for (int l = 0; l < LANES; l++) model[l] = xs(model[l]);
      check_all();
    end
    // lanes must not repeat each other
    checks++;
    if (rnd[0] == rnd[1] && rnd[1] == rnd[2]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
