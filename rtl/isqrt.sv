// isqrt: integer square root, the accelerator's sqrt unit.
//
// root = floor(sqrt(x)) for a W-bit unsigned radicand, computed by the
// digit-by-digit (restoring) method: one result bit per clock, from the most
// significant bit down. Layer normalisation uses it to turn the variance
// into the standard deviation. The paper lists sqrt among the accelerator's
// non-linear operations; the algorithm is this design's choice.
//
// Timing: pulse start with x; done pulses W/2 cycles after the clock edge
// that samples start, with root valid from then on (held until the next
// start).
module isqrt #(
  parameter int W = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   x,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] root
);

  logic [W-1:0]             rad;   // radicand, consumed two bits per step
  logic [W/2+1:0]           rem;
  logic [W/2+1:0]           trial;
  logic [$clog2(W/2+1)-1:0] cnt;

  assign trial = {rem[W/2-1:0], rad[W-1:W-2]} - {root, 2'b01};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      rad  <= '0;
      rem  <= '0;
      root <= '0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        rad  <= x;
        rem  <= '0;
        root <= '0;
        cnt  <= ($clog2(W/2+1))'(W/2);
      end else if (busy) begin
        if (!trial[W/2+1]) begin
          rem  <= trial;
          root <= {root[W/2-2:0], 1'b1};
        end else begin
          rem  <= {rem[W/2-1:0], rad[W-1:W-2]};
          root <= {root[W/2-2:0], 1'b0};
        end
        rad <= {rad[W-3:0], 2'b00};
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
