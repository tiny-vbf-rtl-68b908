// tvbf_accel: Tiny-VBF encoder accelerator, top level.
//
// A vision-transformer encoder is a chain of matrix multiplications (the
// query/key/value projections, the attention scores Q.K^T, attention times
// values, dense layers) and row-wise operations (layer normalisation,
// softmax, scaling, skip-connection additions, ReLU). The accelerator runs
// that chain one layer operation at a time out of three on-chip memories:
// the Input BRAM (the encoder's input activations), the Output BRAM
// (intermediate results and outputs) and the Weight BRAM (8-bit weights and
// biases). Matrix multiplications go to the dot-product path (dot_engine:
// operand buffers, four 16-multiplier PEs, accumulation/concatenation); row
// operations go to the row path (row_engine: layer_norm, softmax_unit,
// eltwise_unit with the sqrt and division units inside them).
//
// Host interface (the paper leaves it open; this is this design's choice):
//   - cmd_valid/cmd_ready/cmd: a CMD_DEPTH-entry queue of layer commands
//     (tvbf_pkg::cmd_t). Commands run in order; cmd_done pulses when one
//     finishes. busy is high while any command is queued or running.
//   - host_wr_*: writes one element into activation memory (host_wr_wgt = 0,
//     element address space of tvbf_pkg) or one weight into the Weight BRAM
//     (host_wr_wgt = 1, low WW bits of the data). host_rd_*: reads one
//     activation element, data one cycle later. The host may use these
//     ports only while busy is low; writes while busy are ignored.
//
// Parameters: BRAM depths in 64-element lines, and the command queue depth.
//
// Timing: a command is popped one cycle after it is queued if nothing runs;
// a matrix multiplication takes one cycle per 64-element part (or per four
// outputs in quad mode) plus about 8 cycles, a row operation the row path's
// time per row. cmd_done pulses once per finished command.
module tvbf_accel
  import tvbf_pkg::*;
#(
  parameter int IN_LINES  = 256,
  parameter int OUT_LINES = 1024,
  parameter int W_LINES   = 256,
  parameter int CMD_DEPTH = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  cmd_t            cmd,
  output logic            busy,
  output logic            cmd_done,
  input  logic            host_wr_en,
  input  logic            host_wr_wgt,
  input  logic [AAW-1:0]  host_wr_addr,
  input  data_t           host_wr_data,
  input  logic            host_rd_en,
  input  logic [AAW-1:0]  host_rd_addr,
  output data_t           host_rd_data
);

  localparam int QW  = $clog2(CMD_DEPTH);
  localparam int WLW = $clog2(W_LINES);

  // ---------------------------------------------------------- command queue
  cmd_t          q [CMD_DEPTH];
  logic [QW-1:0] q_wp, q_rp;
  logic [QW:0]   q_cnt;
  logic          running, run_dot;
  logic          dot_start, row_start, dot_busy, row_busy, dot_done, row_done;
  cmd_t          cur;
  logic          pop;

  assign cmd_ready = (q_cnt != (QW+1)'(CMD_DEPTH));
  assign pop       = !running && (q_cnt != 0);
  assign busy      = running || (q_cnt != 0);

  always_ff @(posedge clk) begin
    if (cmd_valid && cmd_ready) q[q_wp] <= cmd;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q_wp <= '0; q_rp <= '0; q_cnt <= '0;
      running <= 1'b0; run_dot <= 1'b0;
      dot_start <= 1'b0; row_start <= 1'b0; cmd_done <= 1'b0;
    end else begin
      dot_start <= 1'b0;
      row_start <= 1'b0;
      cmd_done  <= 1'b0;
      if (cmd_valid && cmd_ready) q_wp <= q_wp + 1'b1;
      if (pop) begin
        q_rp      <= q_rp + 1'b1;
        cur       <= q[q_rp];
        running   <= 1'b1;
        run_dot   <= (q[q_rp].op == OP_MATMUL);
        dot_start <= (q[q_rp].op == OP_MATMUL);
        row_start <= (q[q_rp].op != OP_MATMUL);
      end
      q_cnt <= q_cnt + (QW+1)'(cmd_valid && cmd_ready) - (QW+1)'(pop);
      if (running && (dot_done || row_done)) begin
        running  <= 1'b0;
        cmd_done <= 1'b1;
      end
    end
  end

  // --------------------------------------------------------------- engines
  logic              d_a_en, d_b_en, d_bias_en, d_wr_en;
  logic [AAW-1:0]    d_a_addr, d_b_addr;
  logic [WAW-1:0]    d_bias_addr;
  logic [AAW-LB-1:0] d_wr_line;
  logic [LINE-1:0]   d_wr_mask;
  dline_t            d_wr_data;
  logic              r_rd0_en, r_rd1_en, r_wr_en;
  logic [AAW-1:0]    r_rd0_addr, r_rd1_addr;
  logic [AAW-LB-1:0] r_wr_line;
  logic [LINE-1:0]   r_wr_mask;
  dline_t            r_wr_data;
  dline_t [1:0]      act_rd_line;
  wline_t [1:0]      w_rd_line;

  dot_engine u_dot (
    .clk(clk), .rst_n(rst_n), .start(dot_start), .cmd(cur), .busy(dot_busy), .done(dot_done),
    .a_rd_en(d_a_en), .a_rd_addr(d_a_addr), .a_rd_line(act_rd_line[0]),
    .b_rd_en(d_b_en), .b_rd_addr(d_b_addr), .b_rd_act(act_rd_line[1]), .b_rd_wgt(w_rd_line[0]),
    .bias_rd_en(d_bias_en), .bias_rd_addr(d_bias_addr), .bias_rd_line(w_rd_line[1]),
    .wr_en(d_wr_en), .wr_line(d_wr_line), .wr_mask(d_wr_mask), .wr_data(d_wr_data));

  row_engine u_row (
    .clk(clk), .rst_n(rst_n), .start(row_start), .cmd(cur), .busy(row_busy), .done(row_done),
    .rd0_en(r_rd0_en), .rd0_addr(r_rd0_addr), .rd0_line(act_rd_line[0]),
    .rd1_en(r_rd1_en), .rd1_addr(r_rd1_addr), .rd1_line(act_rd_line[1]),
    .wr_en(r_wr_en), .wr_line(r_wr_line), .wr_mask(r_wr_mask), .wr_data(r_wr_data));

  // -------------------------------------------------------- port arbitration
  logic [1:0]           act_rd_en;
  logic [1:0][AAW-1:0]  act_rd_addr;
  logic                 act_wr_en;
  logic [AAW-LB-1:0]    act_wr_line;
  logic [LINE-1:0]      act_wr_mask;
  dline_t               act_wr_data;
  logic                 host_ok;
  logic [1:0]           w_rd_en;
  logic [1:0][WLW-1:0]  w_rd_addr;
  logic                 w_wr_en;
  logic [LINE-1:0]      w_wr_mask;

  assign host_ok = !busy;

  always_comb begin
    if (running && run_dot) begin
      act_rd_en   = {d_b_en && !cur.b_wgt, d_a_en};
      act_rd_addr = {d_b_addr, d_a_addr};
      act_wr_en   = d_wr_en;
      act_wr_line = d_wr_line;
      act_wr_mask = d_wr_mask;
      act_wr_data = d_wr_data;
    end else if (running) begin
      act_rd_en   = {r_rd1_en, r_rd0_en};
      act_rd_addr = {r_rd1_addr, r_rd0_addr};
      act_wr_en   = r_wr_en;
      act_wr_line = r_wr_line;
      act_wr_mask = r_wr_mask;
      act_wr_data = r_wr_data;
    end else begin
      act_rd_en   = {1'b0, host_rd_en && host_ok};
      act_rd_addr = {AAW'(0), host_rd_addr};
      act_wr_en   = host_wr_en && host_ok && !host_wr_wgt;
      act_wr_line = host_wr_addr[AAW-1:LB];
      act_wr_mask = LINE'(1) << host_wr_addr[LB-1:0];
      act_wr_data = {LINE{host_wr_data}};
    end
    w_rd_en      = {d_bias_en, d_b_en && cur.b_wgt};
    w_rd_addr[0] = d_b_addr[LB +: WLW];
    w_rd_addr[1] = d_bias_addr[LB +: WLW];
    w_wr_en      = host_wr_en && host_ok && host_wr_wgt;
    w_wr_mask    = LINE'(1) << host_wr_addr[LB-1:0];
  end

  act_mem #(.IN_LINES(IN_LINES), .OUT_LINES(OUT_LINES)) u_act (
    .clk(clk), .rd_en(act_rd_en), .rd_addr(act_rd_addr), .rd_line(act_rd_line),
    .wr_en(act_wr_en), .wr_line(act_wr_line), .wr_mask(act_wr_mask), .wr_data(act_wr_data));

  line_ram #(.W(WW), .LINE(LINE), .DEPTH(W_LINES)) u_weight_bram (
    .clk(clk), .rd_en(w_rd_en), .rd_addr(w_rd_addr), .rd_data(w_rd_line),
    .wr_en(w_wr_en), .wr_addr(host_wr_addr[LB +: WLW]), .wr_mask(w_wr_mask),
    .wr_data({LINE{host_wr_data[WW-1:0]}}));

  // host read data: lane of the line read one cycle earlier
  logic [LB-1:0] host_lane_q;
  always_ff @(posedge clk) if (host_rd_en) host_lane_q <= host_rd_addr[LB-1:0];
  assign host_rd_data = data_t'(act_rd_line[0][host_lane_q]);

  a_one_engine: assert property (@(posedge clk) disable iff (!rst_n) !(dot_busy && row_busy));

endmodule
