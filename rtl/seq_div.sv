// seq_div: unsigned restoring divider, one quotient bit per clock.
//
// Pulse `start` with `num` and `den`; `done` pulses NUM_W+1 cycles later
// with quo = num / den (floor). Division by zero returns all ones. Used
// wherever the accelerator needs a reciprocal or a ratio only a few times
// per pass, so a slow, small divider suffices. A helper of this design;
// the source does not describe the division hardware.
module seq_div #(
  parameter int unsigned NUM_W = 32,
  parameter int unsigned DEN_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NUM_W-1:0] num,
  input  logic [DEN_W-1:0] den,
  output logic             busy,
  output logic             done,
  output logic [NUM_W-1:0] quo
);
  logic [NUM_W-1:0] q_r;
  logic [DEN_W:0]   rem_r;
  logic [DEN_W-1:0] den_r;
  logic [$clog2(NUM_W+1)-1:0] cnt_r;
  logic [DEN_W:0]   trial;

  assign trial = {rem_r[DEN_W-1:0], q_r[NUM_W-1]};
  assign quo   = q_r;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      cnt_r <= '0;
      q_r   <= '0;
      rem_r <= '0;
      den_r <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        q_r   <= num;
        rem_r <= '0;
        den_r <= den;
        cnt_r <= $clog2(NUM_W+1)'(NUM_W);
      end else if (busy) begin
        if (trial >= {1'b0, den_r}) begin
          rem_r <= trial - {1'b0, den_r};
          q_r   <= {q_r[NUM_W-2:0], 1'b1};
        end else begin
          rem_r <= trial;
          q_r   <= {q_r[NUM_W-2:0], 1'b0};
        end
        cnt_r <= cnt_r - 1'b1;
        if (cnt_r == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
