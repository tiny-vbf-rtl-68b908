// pe: one processing element of the Tiny-VBF accelerator.
//
// Sixteen signed multipliers form the products i_n * j_n of the two operand
// vectors (inp1 = i_1..i_16, inp2 = j_1..j_16); the products are captured in
// the registers t_1..t_16 and summed by a binary adder tree. This is the
// structure of the paper's PE. The products keep their full 2*DW bits and
// the tree grows by log2(LEN) bits, so the sum is exact; the output register
// after the tree is this design's choice.
//
// Timing: sum and out_valid appear two clock cycles after in_valid. A new
// pair of vectors can be accepted every cycle.
module pe #(
  parameter int DW  = 16,
  parameter int LEN = 16,
  localparam int SUMW = 2 * DW + $clog2(LEN)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [LEN-1:0][DW-1:0]      inp1,
  input  logic [LEN-1:0][DW-1:0]      inp2,
  output logic                        out_valid,
  output logic signed [SUMW-1:0]      sum
);

  logic signed [2*DW-1:0] t [LEN];      // product registers t_1..t_16
  logic                   t_valid;
  logic signed [SUMW-1:0] node [2*LEN]; // adder tree, heap order: node 1 is the root

  always_ff @(posedge clk) begin
    for (int i = 0; i < LEN; i++)
      t[i] <= $signed(inp1[i]) * $signed(inp2[i]);
  end

  always_comb begin
    node[0] = '0;
    for (int i = 0; i < LEN; i++) node[LEN + i] = SUMW'(t[i]);
    for (int i = LEN - 1; i >= 1; i--) node[i] = node[2*i] + node[2*i+1];
  end

  always_ff @(posedge clk) begin
    sum <= node[1];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      t_valid   <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      t_valid   <= in_valid;
      out_valid <= t_valid;
    end
  end

endmodule
