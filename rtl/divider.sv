// divider: unsigned restoring divider, the accelerator's division unit.
//
// Computes quo = num / den (integer, truncated) one quotient bit per clock,
// most significant bit first. Layer normalisation uses it for the mean, the
// variance and the reciprocal of the standard deviation; softmax uses it
// once per row for the reciprocal of the sum of exponentials. The paper lists
// division among the accelerator's non-linear operations; the restoring
// algorithm is this design's choice. Division by zero returns all ones.
//
// Timing: pulse start with num/den; done pulses W cycles after the clock
// edge that samples start, with quo valid from then on (held until the next
// start). busy is high in between.
module divider #(
  parameter int W = 48
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quo
);

  logic [W-1:0]         d;
  logic [W:0]           rem;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W:0]           trial;

  assign trial = {rem[W-1:0], quo[W-1]} - {1'b0, d};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      rem  <= '0;
      quo  <= '0;
      d    <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        d    <= den;
        quo  <= num;
        rem  <= '0;
        cnt  <= ($clog2(W+1))'(W);
      end else if (busy) begin
        // shift the next dividend bit into the remainder, try to subtract
        if (!trial[W]) begin
          rem <= trial;
          quo <= {quo[W-2:0], 1'b1};
        end else begin
          rem <= {rem[W-1:0], quo[W-1]};
          quo <= {quo[W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
