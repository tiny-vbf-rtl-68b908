// line_ram: on-chip block RAM organised in lines of LINE elements.
//
// Used for the Input, Output and Weight BRAMs of the accelerator. Each
// address holds one line of LINE elements of W bits, the width of one
// PE-array operand. Two independent read ports return a whole line one
// cycle after the request (registered output, as in a block RAM). The
// single write port writes any subset of the line's elements, selected by
// wr_mask, so results can be written one element or four elements at a time.
// A read of the line being written in the same cycle returns the old data.
// The paper names the three BRAMs; the line organisation, the port count
// and the depths are this design's choices.
module line_ram #(
  parameter int W     = 16,
  parameter int LINE  = 64,
  parameter int DEPTH = 256,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                        clk,
  input  logic [1:0]                  rd_en,
  input  logic [1:0][AW-1:0]          rd_addr,
  output logic [1:0][LINE-1:0][W-1:0] rd_data,
  input  logic                        wr_en,
  input  logic [AW-1:0]               wr_addr,
  input  logic [LINE-1:0]             wr_mask,
  input  logic [LINE-1:0][W-1:0]      wr_data
);

  logic [LINE-1:0][W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++)
      if (rd_en[p]) rd_data[p] <= mem[rd_addr[p]];
    if (wr_en)
      for (int e = 0; e < LINE; e++)
        if (wr_mask[e]) mem[wr_addr][e] <= wr_data[e];
  end

endmodule
