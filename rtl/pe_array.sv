// pe_array: the four processing elements and the adder that joins them.
//
// The 64-element operand lines a_vec and b_vec are cut into four 16-element
// slices, the operand buffers inp1/inp2 (PE1), inp3/inp4 (PE2), inp5/inp6
// (PE3) and inp7/inp8 (PE4). Two modes, both taken from the paper's
// dataflow figures:
//   quad = 0  the four PE results are added into one 64-element dot product
//             (the query/key/value projections, dense layers and the
//             attention-times-value product); res[0] holds the sum.
//   quad = 1  each PE delivers its own 16-element dot product (the
//             attention scores Q.K^T with k = 16); res[p] is PE p+1's result.
// In quad mode res[1..3] are the single PE results; in sum mode they also
// carry them but are not used.
//
// Timing: results appear three cycles after in_valid (two in the PEs, one
// for the final adder, a register this design adds). Fully pipelined.
module pe_array #(
  parameter int DW  = 16,
  parameter int LEN = 16,
  parameter int NPE = 4,
  localparam int PSUMW = 2 * DW + $clog2(LEN),
  localparam int RESW  = PSUMW + $clog2(NPE)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic                           quad,
  input  logic [NPE*LEN-1:0][DW-1:0]     a_vec,
  input  logic [NPE*LEN-1:0][DW-1:0]     b_vec,
  output logic                           out_valid,
  output logic                           out_quad,
  output logic signed [NPE-1:0][RESW-1:0] res
);

  logic signed [PSUMW-1:0] pe_sum [NPE];
  logic [NPE-1:0]          pe_valid;
  logic [1:0]              quad_d;
  logic signed [RESW-1:0]  total;

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    pe #(.DW(DW), .LEN(LEN)) u_pe (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .inp1     (a_vec[p*LEN +: LEN]),
      .inp2     (b_vec[p*LEN +: LEN]),
      .out_valid(pe_valid[p]),
      .sum      (pe_sum[p])
    );
  end

  always_comb begin
    total = '0;
    for (int p = 0; p < NPE; p++) total += RESW'(pe_sum[p]);
  end

  always_ff @(posedge clk) begin
    quad_d <= {quad_d[0], quad};
    out_quad <= quad_d[1];
    for (int p = 0; p < NPE; p++) res[p] <= RESW'(pe_sum[p]);
    if (!quad_d[1]) res[0] <= total;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= pe_valid[0];
  end

endmodule
