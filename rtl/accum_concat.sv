// accum_concat: accumulation of partial dot products and result shaping.
//
// A dot product longer than one 64-element line (a dense layer over 4096
// inputs, or a 184-long attention row times a value column) arrives as a
// sequence of partial sums, one per line. Each of the NL lanes keeps an
// accumulator: the part marked `first` loads it, later parts add to it, and
// the part marked `last` releases the result. On release the optional bias
// (8-bit weight format, shifted left by bias_lsh to the accumulator's
// scale) is added, the sum is shifted right by `shift` with rounding to
// nearest, ReLU is applied when `relu` is set and the value is saturated to
// DW bits. The caller places each released result at its column offset in
// the Output BRAM, which is how the heads' outputs are concatenated.
// The paper gives this block's function (accumulate partial results, then
// store them); bias, rounding and saturation are this design's choices.
//
// Timing: out_valid/out follow a `last` part by one cycle.
module accum_concat #(
  parameter int NL   = 4,
  parameter int INW  = 38,
  parameter int DW   = 16,
  parameter int WW   = 8,
  parameter int AW   = 48
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic                          first,
  input  logic                          last,
  input  logic signed [NL-1:0][INW-1:0] part,
  input  logic signed [NL-1:0][WW-1:0]  bias,
  input  logic [4:0]                    bias_lsh,
  input  logic [5:0]                    shift,
  input  logic                          relu,
  output logic                          out_valid,
  output logic signed [NL-1:0][DW-1:0]  out
);

  localparam logic signed [AW-1:0] MAXV = AW'((64'sd1 <<< (DW - 1)) - 1);
  localparam logic signed [AW-1:0] MINV = -AW'(64'sd1 <<< (DW - 1));

  logic signed [AW-1:0] acc [NL];
  logic signed [AW-1:0] nxt [NL];
  logic signed [AW-1:0] fin [NL];
  logic signed [DW-1:0] sat [NL];

  always_comb begin
    for (int l = 0; l < NL; l++) begin
      nxt[l] = (first ? '0 : acc[l]) + AW'($signed(part[l]));
      fin[l] = nxt[l] + (AW'($signed(bias[l])) <<< bias_lsh);
      if (shift != 0) fin[l] = (fin[l] + (AW'(1) <<< (shift - 6'd1))) >>> shift;
      if (relu && fin[l] < 0) fin[l] = '0;
      if (fin[l] > MAXV)      sat[l] = DW'(MAXV);
      else if (fin[l] < MINV) sat[l] = DW'(MINV);
      else                    sat[l] = DW'(fin[l]);
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int l = 0; l < NL; l++) acc[l] <= nxt[l];
      if (last) for (int l = 0; l < NL; l++) out[l] <= sat[l];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && last;
  end

endmodule
