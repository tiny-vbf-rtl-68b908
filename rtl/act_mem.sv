// act_mem: the activation memory, Input BRAM plus Output BRAM.
//
// Maps one element address space onto the two activation BRAMs: addresses
// below OUT_BASE select the Input BRAM (the layer input, written by the
// host), addresses from OUT_BASE up select the Output BRAM (intermediate
// results and the layer output). Both are line_ram instances with 64-element
// lines. Reads take an element address and return the whole line holding it
// one cycle later; the write port takes a line address and an element mask.
// The split into an Input and an Output BRAM is the paper's; the shared
// address space and the two read ports are this design's choices.
// Timing: read data one cycle after the request, as line_ram.
module act_mem
  import tvbf_pkg::*;
#(
  parameter int IN_LINES  = 256,
  parameter int OUT_LINES = 1024
) (
  input  logic                   clk,
  input  logic [1:0]             rd_en,
  input  logic [1:0][AAW-1:0]    rd_addr,
  output dline_t [1:0]           rd_line,
  input  logic                   wr_en,
  input  logic [AAW-LB-1:0]      wr_line,
  input  logic [LINE-1:0]        wr_mask,
  input  dline_t                 wr_data
);

  localparam int IAW = $clog2(IN_LINES);
  localparam int OAW = $clog2(OUT_LINES);
  localparam int OBL = AAW - 1 - LB;   // line-address bit that selects the Output BRAM

  logic [1:0]           in_rd_en, out_rd_en, sel_q;
  logic [1:0][IAW-1:0]  in_rd_addr;
  logic [1:0][OAW-1:0]  out_rd_addr;
  dline_t [1:0]         in_rd_line, out_rd_line;

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      in_rd_en[p]    = rd_en[p] && !rd_addr[p][AAW-1];
      out_rd_en[p]   = rd_en[p] &&  rd_addr[p][AAW-1];
      in_rd_addr[p]  = rd_addr[p][LB +: IAW];
      out_rd_addr[p] = rd_addr[p][LB +: OAW];
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++) if (rd_en[p]) sel_q[p] <= rd_addr[p][AAW-1];
  end

  line_ram #(.W(DW), .LINE(LINE), .DEPTH(IN_LINES)) u_input_bram (
    .clk(clk), .rd_en(in_rd_en), .rd_addr(in_rd_addr), .rd_data(in_rd_line),
    .wr_en(wr_en && !wr_line[OBL]), .wr_addr(wr_line[IAW-1:0]),
    .wr_mask(wr_mask), .wr_data(wr_data));

  line_ram #(.W(DW), .LINE(LINE), .DEPTH(OUT_LINES)) u_output_bram (
    .clk(clk), .rd_en(out_rd_en), .rd_addr(out_rd_addr), .rd_data(out_rd_line),
    .wr_en(wr_en && wr_line[OBL]), .wr_addr(wr_line[OAW-1:0]),
    .wr_mask(wr_mask), .wr_data(wr_data));

  always_comb begin
    for (int p = 0; p < 2; p++) rd_line[p] = sel_q[p] ? out_rd_line[p] : in_rd_line[p];
  end

endmodule
