// dot_engine: the dot-product path of the accelerator (matrix multiplication).
//
// Executes one OP_MATMUL command, out[m][n] = sum_k A[m][k] * B[n][k] (B is
// stored as the rows of B^T, so a column of a weight matrix is contiguous).
// Rows m are the outer loop, columns n the middle loop and 64-element parts
// of the dot product the inner loop. Every cycle it reads one 64-element line
// of A (the row buffer: inp_row / A_row_part) and one of B (the column
// buffer: wgt_col / K_row / V_col_part), masks the elements past the dot
// length kd, and loads the eight 16-element operand buffers inp1..inp8 of
// the PE array. This is the dataflow of the paper's Q/K/V, Q.K^T and A.V
// figures. Two modes:
//   sum  (quad=0)  A row and B row start on 64-element boundaries; the four
//                  PE results are added, parts are accumulated (accum_concat)
//                  and one result is written per output.
//   quad (quad=1)  kd <= 16: one 16-element A row (e.g. a query row) is
//                  broadcast to all four PEs and one B line holds four
//                  consecutive 16-element rows (e.g. four key rows, b_stride
//                  = 16, b_base and n on 4-row boundaries); four results per
//                  cycle, written to four consecutive elements (o_cs = 1,
//                  each output row starting on a 4-element boundary).
// B comes from the Weight BRAM (b_wgt = 1, 8-bit weights sign-extended) or
// from activation memory. The optional bias is read from the Weight BRAM at
// bias_base + n. Results are written with row stride o_rs and column stride
// o_cs, so a head's output can be placed at its column offset (concatenation)
// or written transposed (the value matrix, so A.V reads contiguous columns).
// Line-wide reads and the address conventions are this design's choices.
//
// Timing: one part per clock, no stalls. A command of M*N*ceil(kd/64) parts
// (M*ceil(N/4) in quad mode) takes that many cycles plus 7 of pipeline; done
// pulses when the last result has been written.
module dot_engine
  import tvbf_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  cmd_t               cmd,
  output logic               busy,
  output logic               done,
  // A operand: activation memory
  output logic               a_rd_en,
  output logic [AAW-1:0]     a_rd_addr,
  input  dline_t             a_rd_line,
  // B operand: activation memory or Weight BRAM
  output logic               b_rd_en,
  output logic [AAW-1:0]     b_rd_addr,
  input  dline_t             b_rd_act,
  input  wline_t             b_rd_wgt,
  // bias: Weight BRAM
  output logic               bias_rd_en,
  output logic [WAW-1:0]     bias_rd_addr,
  input  wline_t             bias_rd_line,
  // results
  output logic               wr_en,
  output logic [AAW-LB-1:0]  wr_line,
  output logic [LINE-1:0]    wr_mask,
  output dline_t             wr_data
);

  typedef struct packed {
    logic           valid;
    logic           first;
    logic           last;
    logic [6:0]     cnt;     // valid elements of the part (per PE slice in quad mode)
    logic [1:0]     sel;     // quad: 16-element slice of the A line
    logic [2:0]     nval;    // results of this output step (1 or up to 4)
    logic [LB-1:0]  blane;   // bias lane of the first result
    logic [AAW-1:0] optr;    // element address of the first result
  } tag_t;

  cmd_t            c;
  logic            issuing;
  logic [CNTW-1:0] mi, ni, ci, nparts;
  logic [CNTW-1:0] rem;
  logic [AAW-1:0]  a_row, a_ptr, b_col, b_ptr, o_row, o_ptr;
  tag_t            tag0, tag1, tag2;
  tag_t            tagd [3];
  tag_t            tag6;
  logic [CNTW-1:0] nstep;
  logic            last_part, last_n, last_m;

  assign nstep     = c.quad ? CNTW'(4) : CNTW'(1);
  assign last_part = (ci == nparts - 1'b1);
  assign last_n    = (ni + nstep >= c.n);
  assign last_m    = (mi == c.m - 1'b1);

  // ---------------------------------------------------------------- issue
  always_comb begin
    tag0       = '0;
    tag0.valid = issuing;
    tag0.first = (ci == 0);
    tag0.last  = last_part;
    if (c.quad) tag0.cnt = (c.kd >= CNTW'(LEN)) ? 7'(LEN) : 7'(c.kd);
    else        tag0.cnt = (rem  >= CNTW'(LINE)) ? 7'(LINE) : 7'(rem);
    tag0.sel   = a_ptr[5:4];
    if (c.quad) tag0.nval = (c.n - ni >= CNTW'(4)) ? 3'd4 : 3'(c.n - ni);
    else        tag0.nval = 3'd1;
    tag0.blane = LB'(c.bias_base + WAW'(ni));
    tag0.optr  = o_ptr;
  end

  assign a_rd_en      = issuing;
  assign a_rd_addr    = a_ptr;
  assign b_rd_en      = issuing;
  assign b_rd_addr    = b_ptr;
  assign bias_rd_en   = issuing && c.bias_en;
  assign bias_rd_addr = c.bias_base + WAW'(ni);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      mi <= '0; ni <= '0; ci <= '0; rem <= '0; nparts <= '0;
    end else if (start && !busy) begin
      c       <= cmd;
      issuing <= (cmd.m != 0) && (cmd.n != 0);
      mi <= '0; ni <= '0; ci <= '0;
      rem     <= cmd.kd;
      nparts  <= cmd.quad ? CNTW'(1) : CNTW'((cmd.kd + CNTW'(LINE - 1)) >> LB);
      a_row   <= cmd.a_base;  a_ptr <= cmd.a_base;
      b_col   <= cmd.b_base;  b_ptr <= cmd.b_base;
      o_row   <= cmd.o_base;  o_ptr <= cmd.o_base;
    end else if (issuing) begin
      if (!last_part) begin
        ci    <= ci + 1'b1;
        rem   <= rem - CNTW'(LINE);
        a_ptr <= a_ptr + AAW'(LINE);
        b_ptr <= b_ptr + AAW'(LINE);
      end else begin
        ci  <= '0;
        rem <= c.kd;
        if (!last_n) begin
          ni    <= ni + nstep;
          a_ptr <= a_row;
          b_col <= b_col + (c.quad ? c.b_stride << 2 : c.b_stride);
          b_ptr <= b_col + (c.quad ? c.b_stride << 2 : c.b_stride);
          o_ptr <= o_ptr + (c.quad ? c.o_cs << 2 : c.o_cs);
        end else begin
          ni    <= '0;
          mi    <= mi + 1'b1;
          a_row <= a_row + c.a_stride;
          a_ptr <= a_row + c.a_stride;
          b_col <= c.b_base;
          b_ptr <= c.b_base;
          o_row <= o_row + c.o_rs;
          o_ptr <= o_row + c.o_rs;
          if (last_m) issuing <= 1'b0;
        end
      end
    end
  end

  // ------------------------------------------- operand buffers inp1..inp8
  dline_t                     a_buf, b_buf;
  logic signed [NPE-1:0][WW-1:0] bias_q, bias_buf;

  always_ff @(posedge clk) begin
    if (!rst_n) tag1 <= '0;
    else        tag1 <= tag0;
  end

  always_ff @(posedge clk) begin
    for (int e = 0; e < LINE; e++) begin
      logic [6:0] k;
      k = c.quad ? 7'(e % LEN) : 7'(e);
      if (k < tag1.cnt) begin
        a_buf[e] <= c.quad ? a_rd_line[tag1.sel * LEN + (e % LEN)] : a_rd_line[e];
        b_buf[e] <= c.b_wgt ? DW'($signed(b_rd_wgt[e])) : b_rd_act[e];
      end else begin
        a_buf[e] <= '0;
        b_buf[e] <= '0;
      end
    end
    for (int p = 0; p < NPE; p++)
      bias_buf[p] <= c.bias_en ? bias_rd_line[LB'(tag1.blane + LB'(p))] : '0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) tag2 <= '0;
    else        tag2 <= tag1;
  end

  // ------------------------------------------------------------- PE array
  logic                              pa_valid, pa_quad;
  logic signed [NPE-1:0][ARRW-1:0]   pa_res;

  pe_array #(.DW(DW), .LEN(LEN), .NPE(NPE)) u_array (
    .clk(clk), .rst_n(rst_n), .in_valid(tag2.valid), .quad(c.quad),
    .a_vec(a_buf), .b_vec(b_buf),
    .out_valid(pa_valid), .out_quad(pa_quad), .res(pa_res));

  // tags and biases follow the PE array's three-cycle latency
  logic signed [NPE-1:0][WW-1:0] bias_d [3];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) tagd[i] <= '0;
    end else begin
      tagd[0] <= tag2;
      tagd[1] <= tagd[0];
      tagd[2] <= tagd[1];
    end
    bias_d[0] <= bias_buf;
    bias_d[1] <= bias_d[0];
    bias_d[2] <= bias_d[1];
  end
  assign bias_q = bias_d[2];

  // ------------------------------------------ accumulation / concatenation
  logic                          ac_valid;
  logic signed [NPE-1:0][DW-1:0] ac_out;

  accum_concat #(.NL(NPE), .INW(ARRW), .DW(DW), .WW(WW), .AW(48)) u_acc (
    .clk(clk), .rst_n(rst_n), .in_valid(pa_valid && tagd[2].valid),
    .first(tagd[2].first), .last(tagd[2].last), .part(pa_res), .bias(bias_q),
    .bias_lsh(c.bias_lsh), .shift(c.shift), .relu(c.relu),
    .out_valid(ac_valid), .out(ac_out));

  always_ff @(posedge clk) begin
    if (!rst_n) tag6 <= '0;
    else        tag6 <= tagd[2];
  end

  // ----------------------------------------------------------- write-back
  always_comb begin
    wr_en   = ac_valid;
    wr_line = tag6.optr[AAW-1:LB];
    wr_mask = '0;
    wr_data = '0;
    for (int p = 0; p < NPE; p++) begin
      logic [AAW-1:0] a;
      a = tag6.optr + AAW'(p) * c.o_cs;
      if (3'(p) < tag6.nval) begin
        wr_mask[a[LB-1:0]] = 1'b1;
        wr_data[a[LB-1:0]] = ac_out[p];
      end
    end
  end

  // -------------------------------------------------------------- control
  logic inflight;
  assign inflight = tag1.valid || tag2.valid || tagd[0].valid || tagd[1].valid ||
                    tagd[2].valid || tag6.valid;
  assign busy = issuing || inflight;

  always_ff @(posedge clk) begin
    if (!rst_n) done <= 1'b0;
    else        done <= tag6.valid && !issuing && !tag1.valid && !tag2.valid &&
                        !tagd[0].valid && !tagd[1].valid && !tagd[2].valid;
  end

  // command rules of the two modes
  a_quad_len: assert property (@(posedge clk) disable iff (!rst_n)
                               (start && !busy && cmd.quad) |-> (cmd.kd <= CNTW'(LEN)));
  a_sum_align: assert property (@(posedge clk) disable iff (!rst_n)
                               (start && !busy && !cmd.quad) |->
                               (cmd.a_base[LB-1:0] == 0 && cmd.a_stride[LB-1:0] == 0));
  a_quad_line: assert property (@(posedge clk) disable iff (!rst_n)
                               (wr_en && tag6.nval > 1) |->
                               ((tag6.optr + AAW'(tag6.nval - 1'b1) * c.o_cs) >> LB) == (tag6.optr >> LB));

endmodule
