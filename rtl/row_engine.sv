// row_engine: the row path of the accelerator (LN, softmax, Add, ReLU, Scaling).
//
// Executes one row command (OP_LN, OP_SOFTMAX, OP_ADD, OP_RELU, OP_SCALE)
// over cmd.m rows of cmd.n elements. Row r is read from a_base + r*a_stride
// (and, for OP_ADD, the second operand from b_base + r*b_stride) and its
// result is written to o_base + r*o_rs; in-place operation is allowed.
// Layer normalisation and softmax run their own multi-pass sequences through
// the layer_norm and softmax_unit blocks; this engine turns their element
// indices into BRAM addresses, one element per cycle (memory read latency
// one cycle). The element-wise operations stream through eltwise_unit, one
// element per cycle. How the operations are sequenced is this design's
// choice; the paper only lists the units.
//
// Timing: a row of an element-wise operation takes n + 2 cycles; LN and
// softmax rows see the units' own timing. done pulses after the last write.
module row_engine
  import tvbf_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  cmd_t               cmd,
  output logic               busy,
  output logic               done,
  output logic               rd0_en,
  output logic [AAW-1:0]     rd0_addr,
  input  dline_t             rd0_line,
  output logic               rd1_en,
  output logic [AAW-1:0]     rd1_addr,
  input  dline_t             rd1_line,
  output logic               wr_en,
  output logic [AAW-LB-1:0]  wr_line,
  output logic [LINE-1:0]    wr_mask,
  output dline_t             wr_data
);

  localparam int IW = 9;

  typedef enum logic [2:0] { S_IDLE, S_ROW, S_UNIT, S_EW, S_NEXT, S_DONE } state_t;

  state_t          state;
  cmd_t            c;
  logic [CNTW-1:0] ri;
  logic [AAW-1:0]  a_row, b_row, o_row;

  // unit hookup
  logic            ln_start, ln_busy, ln_done, ln_rd_req, ln_wr_en;
  logic [IW-1:0]   ln_rd_idx, ln_wr_idx;
  data_t           ln_wr_data;
  logic            sm_start, sm_busy, sm_done, sm_rd_req, sm_wr_en;
  logic [IW-1:0]   sm_rd_idx, sm_wr_idx;
  data_t           sm_wr_data;
  logic            u_valid;
  logic [LB-1:0]   lane0_q, lane1_q;
  data_t           rd0_elem, rd1_elem;

  assign rd0_elem = data_t'(rd0_line[lane0_q]);
  assign rd1_elem = data_t'(rd1_line[lane1_q]);

  layer_norm #(.DW(DW), .FRAC(FRAC), .IW(IW)) u_ln (
    .clk(clk), .rst_n(rst_n), .start(ln_start), .len(IW'(c.n)),
    .busy(ln_busy), .done(ln_done),
    .rd_req(ln_rd_req), .rd_idx(ln_rd_idx), .rd_valid(u_valid && c.op == OP_LN),
    .rd_data(rd0_elem),
    .wr_en(ln_wr_en), .wr_idx(ln_wr_idx), .wr_data(ln_wr_data));

  softmax_unit #(.DW(DW), .FRAC(FRAC), .SW(SW), .IW(IW)) u_sm (
    .clk(clk), .rst_n(rst_n), .start(sm_start), .len(IW'(c.n)),
    .busy(sm_busy), .done(sm_done),
    .rd_req(sm_rd_req), .rd_idx(sm_rd_idx), .rd_valid(u_valid && c.op == OP_SOFTMAX),
    .rd_data(rd0_elem),
    .wr_en(sm_wr_en), .wr_idx(sm_wr_idx), .wr_data(sm_wr_data));

  // element-wise stream
  logic [CNTW-1:0] ei;        // element being read
  logic            ew_issue, ew_valid;
  logic [CNTW-1:0] ew_idx;
  ew_op_t          ew_op;
  data_t           ew_y;

  always_comb begin
    unique case (c.op)
      OP_ADD:  ew_op = EW_ADD;
      OP_RELU: ew_op = EW_RELU;
      default: ew_op = EW_SCALE;
    endcase
  end

  eltwise_unit #(.DW(DW)) u_ew (
    .op(ew_op), .a(rd0_elem), .b(rd1_elem), .shift(c.shift[3:0]), .y(ew_y));

  // read ports
  always_comb begin
    rd0_en   = 1'b0;
    rd0_addr = a_row;
    rd1_en   = 1'b0;
    rd1_addr = b_row;
    if (c.op == OP_LN) begin
      rd0_en   = ln_rd_req;
      rd0_addr = a_row + AAW'(ln_rd_idx);
    end else if (c.op == OP_SOFTMAX) begin
      rd0_en   = sm_rd_req;
      rd0_addr = a_row + AAW'(sm_rd_idx);
    end else begin
      rd0_en   = ew_issue;
      rd0_addr = a_row + AAW'(ei);
      rd1_en   = ew_issue && c.op == OP_ADD;
      rd1_addr = b_row + AAW'(ei);
    end
  end

  // write port: one element per cycle
  always_comb begin
    logic [AAW-1:0] wa;
    data_t          wd;
    logic           we;
    we = 1'b0;
    wa = o_row;
    wd = '0;
    if (c.op == OP_LN)           begin we = ln_wr_en; wa = o_row + AAW'(ln_wr_idx); wd = ln_wr_data; end
    else if (c.op == OP_SOFTMAX) begin we = sm_wr_en; wa = o_row + AAW'(sm_wr_idx); wd = sm_wr_data; end
    else                         begin we = ew_valid; wa = o_row + AAW'(ew_idx);    wd = ew_y;       end
    wr_en   = we;
    wr_line = wa[AAW-1:LB];
    wr_mask = '0;
    wr_mask[wa[LB-1:0]] = 1'b1;
    wr_data = {LINE{wd}};
  end

  assign ew_issue = (state == S_EW) && (ei < c.n);
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      done     <= 1'b0;
      ln_start <= 1'b0;
      sm_start <= 1'b0;
      u_valid  <= 1'b0;
      ew_valid <= 1'b0;
      ri       <= '0;
      ei       <= '0;
    end else begin
      done     <= 1'b0;
      ln_start <= 1'b0;
      sm_start <= 1'b0;
      u_valid  <= rd0_en && (c.op == OP_LN || c.op == OP_SOFTMAX);
      ew_valid <= ew_issue;
      ew_idx   <= ei;
      lane0_q  <= rd0_addr[LB-1:0];
      lane1_q  <= rd1_addr[LB-1:0];
      unique case (state)
        S_IDLE: if (start) begin
          c     <= cmd;
          ri    <= '0;
          a_row <= cmd.a_base;
          b_row <= cmd.b_base;
          o_row <= cmd.o_base;
          state <= (cmd.m == 0 || cmd.n == 0) ? S_DONE : S_ROW;
        end
        S_ROW: begin
          ei <= '0;
          if (c.op == OP_LN)           begin ln_start <= 1'b1; state <= S_UNIT; end
          else if (c.op == OP_SOFTMAX) begin sm_start <= 1'b1; state <= S_UNIT; end
          else                         state <= S_EW;
        end
        S_UNIT: if (ln_done || sm_done) state <= S_NEXT;
        S_EW: begin
          if (ei < c.n) ei <= ei + 1'b1;
          else if (!ew_valid) state <= S_NEXT;   // last element written
        end
        S_NEXT: begin
          ri    <= ri + 1'b1;
          a_row <= a_row + c.a_stride;
          b_row <= b_row + c.b_stride;
          o_row <= o_row + c.o_rs;
          state <= (ri == c.m - 1'b1) ? S_DONE : S_ROW;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_ln_len: assert property (@(posedge clk) disable iff (!rst_n)
                             (start && !busy && (cmd.op == OP_LN || cmd.op == OP_SOFTMAX))
                             |-> (cmd.n < CNTW'(1 << IW)));

endmodule
