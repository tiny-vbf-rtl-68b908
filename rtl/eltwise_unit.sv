// eltwise_unit: the element-wise operations of the accelerator.
//
// One combinational unit for the three simple element-wise blocks the
// accelerator has: Add (the skip connections of the transformer block, the
// position-embedding addition and the decoder's Add), ReLU, and Scaling
// (division of the attention scores by sqrt(k); with k = 16 that is an exact
// shift right by 2). Add saturates to DW bits; Scaling is an arithmetic
// right shift rounded to nearest. The paper names these blocks; saturation
// and rounding are this design's choices.
//
// Timing: combinational, y follows a, b, op and shift in the same cycle.
module eltwise_unit
  import tvbf_pkg::ew_op_t, tvbf_pkg::EW_ADD, tvbf_pkg::EW_RELU, tvbf_pkg::EW_SCALE;
#(
  parameter int DW = 16
) (
  input  ew_op_t               op,
  input  logic signed [DW-1:0] a,
  input  logic signed [DW-1:0] b,
  input  logic [3:0]           shift,
  output logic signed [DW-1:0] y
);

  logic signed [DW:0] s;

  always_comb begin
    s = '0;
    unique case (op)
      EW_ADD: begin
        s = (DW+1)'(a) + (DW+1)'(b);
      end
      EW_RELU: begin
        s = (a < 0) ? '0 : (DW+1)'(a);
      end
      EW_SCALE: begin
        if (shift == 0) s = (DW+1)'(a);
        else            s = ((DW+1)'(a) + ((DW+1)'(1) <<< (shift - 4'd1))) >>> shift;
      end
      default: s = '0;
    endcase
    if (s[DW] != s[DW-1]) y = s[DW] ? {1'b1, {(DW-1){1'b0}}} : {1'b0, {(DW-1){1'b1}}};
    else                  y = s[DW-1:0];
  end

endmodule
