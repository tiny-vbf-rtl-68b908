// tb_tvbf_block: one complete transformer block of the Tiny-VBF encoder.
//
// Runs a whole block on the accelerator at its default size and the
// model's dimensions (184 patches, projection dimension 64, 4 heads of 16):
//   LN1       Xln = LN(X)
//   for each head h (weights reloaded by the host before every head):
//     Q, K, V^T projections with bias (dense layers, sum mode, weights)
//     S = Q.K^T (quad mode), S >>= 2 (1/sqrt(16)), softmax rows
//     O = S.V (three accumulated parts of 64, masked tail)
//     head dense C[:, 16h..16h+15] = O Wd + bd, run in quad mode with B
//     from the Weight BRAM; writing at column offset 16h concatenates the
//     heads
//   skip      X = X + C
//   LN2       Xln = LN(X)
//   MLP       H = relu(Xln W1 + b1), D = H W2 + b2 (64 -> 64 -> 64)
//   skip      X = X + D
// A shadow model here applies each command to its own copy of the memories
// with the accelerator's fixed-point arithmetic. The concatenated attention
// output C and the final X are read back through the host port and compared
// element by element. The width of the MLP is not given for this network
// and is taken here as 64.
//
// Memory plan (element addresses; OUT = Output BRAM base):
//   Input BRAM  X 0..11775, Q (and later O) 11776..14719
//   Output BRAM Xln +0, C +11776 (also H), S +23552 (row stride 192, also D),
//               K +58880, V^T +61824 (row stride 192)
//   Weights     Wq 0, Wk 1024, Wv 2048, Wd 3072, biases 3328/3344/3360/3376;
//               W1 4096, W2 8192, b1 12288, b2 12352 (stored transposed)
//
// Interface and timing: no ports, clock period 10, the accelerator at its
// default parameters. A watchdog stops the run after 6,000,000 cycles as a
// failure. The run takes about 900,000 cycles. Each mechanism (weight
// reload, queue stall, quad mode with weights, multi-part sums, masked
// tails, LN, softmax, scaling, add, dense with ReLU) is counted and must
// happen. The closing line reports checks and failures.
module tb_tvbf_block;
  import tvbf_pkg::*;
  localparam int NP = 184, PD = 64, K = 16, NH = 4, SROW = 192;
  localparam logic [AAW-1:0] X_A   = 17'd0;
  localparam logic [AAW-1:0] Q_A   = 17'd11776;
  localparam logic [AAW-1:0] XLN_A = OUT_BASE;
  localparam logic [AAW-1:0] C_A   = OUT_BASE + 17'd11776;
  localparam logic [AAW-1:0] S_A   = OUT_BASE + 17'd23552;
  localparam logic [AAW-1:0] K_A   = OUT_BASE + 17'd58880;
  localparam logic [AAW-1:0] VT_A  = OUT_BASE + 17'd61824;
  localparam int WQ = 0, WK = 1024, WV = 2048, WD = 3072;
  localparam int BQ = 3328, BK = 3344, BV = 3360, BD = 3376;
  localparam int W1 = 4096, W2 = 8192, B1 = 12288, B2 = 12352;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy, cmd_done;
  cmd_t cmd;
  logic host_wr_en = 0, host_wr_wgt = 0, host_rd_en = 0;
  logic [AAW-1:0] host_wr_addr = '0, host_rd_addr = '0;
  data_t host_wr_data = '0, host_rd_data;

  tvbf_accel dut (.*);

  logic signed [15:0] sh [1 << AAW];
  logic signed [7:0]  wg [1 << WAW];
  int checks = 0, failures = 0, n_cmds = 0;
  int n_stall = 0, n_done = 0, n_sat = 0, n_relu0 = 0, n_reload = 0;
  int n_quad_w = 0, n_multi = 0, n_tail = 0;
  int n_ln = 0, n_sm = 0, n_scale = 0, n_add = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (cmd_valid && !cmd_ready) n_stall++;
    if (cmd_done) n_done++;
    if (dut.dot_start) begin
      if (dut.cur.quad && dut.cur.b_wgt) n_quad_w++;
      if (dut.cur.kd > CNTW'(LINE)) n_multi++;
    end
    if (dut.u_dot.wr_en && dut.u_dot.wr_mask != '1) n_tail++;
    if (dut.row_start)
      case (dut.cur.op)
        OP_LN:      n_ln++;
        OP_SOFTMAX: n_sm++;
        OP_SCALE:   n_scale++;
        OP_ADD:     n_add++;
        default: ;
      endcase
  end

  // ------------------------------------------------------- shadow model
  function automatic longint sv(logic signed [15:0] v);
    return longint'(v);
  endfunction
  function automatic longint sat16(longint v);
    if (v > 32767) begin n_sat++; return 32767; end
    if (v < -32768) begin n_sat++; return -32768; end
    return v;
  endfunction
  function automatic longint isqrt_ref(longint v);
    longint r = 0;
    for (int b = 15; b >= 0; b--) if ((r + (1 << b)) * (r + (1 << b)) <= v) r += (1 << b);
    return r;
  endfunction
  function automatic longint exp_ref(longint y);
    longint t, z, ip, f, m;
    t = y * 23637; z = t >>> 14; ip = z >>> 10; f = z & 1023;
    m = (longint'(1) << 22) + f * 2689 + ((f * f * 1407) >> 10);
    if (-ip >= 24) return 0;
    return m >> (-ip);
  endfunction

  task automatic ref_cmd(cmd_t c);
    for (int r = 0; r < int'(c.m); r++) begin
      logic [AAW-1:0] ar, br, orr;
      ar = c.a_base + AAW'(r) * c.a_stride;
      br = c.b_base + AAW'(r) * c.b_stride;
      orr = c.o_base + AAW'(r) * c.o_rs;
      case (c.op)
        OP_MATMUL: begin
          for (int n = 0; n < int'(c.n); n++) begin
            longint acc;
            acc = 0;
            for (int k = 0; k < int'(c.kd); k++)
              acc += sv(sh[ar + AAW'(k)]) *
                     (c.b_wgt ? longint'(wg[WAW'(c.b_base + AAW'(n) * c.b_stride + AAW'(k))])
                              : sv(sh[c.b_base + AAW'(n) * c.b_stride + AAW'(k)]));
            if (c.bias_en) acc += longint'(wg[c.bias_base + WAW'(n)]) <<< c.bias_lsh;
            if (c.shift != 0) acc = (acc + (longint'(1) <<< (c.shift - 1))) >>> c.shift;
            if (c.relu && acc < 0) begin acc = 0; n_relu0++; end
            sh[orr + AAW'(n) * c.o_cs] = 16'(sat16(acc));
          end
        end
        OP_LN: begin
          longint s, mean, ssq, var_, sd, inv;
          s = 0; for (int i = 0; i < int'(c.n); i++) s += sv(sh[ar + AAW'(i)]);
          mean = (s < 0) ? -((-s) / c.n) : s / c.n;
          ssq = 0; for (int i = 0; i < int'(c.n); i++) ssq += (sv(sh[ar + AAW'(i)]) - mean) ** 2;
          var_ = ssq / c.n;
          if (var_ > 64'hffff_ffff) var_ = 64'hffff_ffff;
          sd = isqrt_ref(var_); if (sd == 0) sd = 1;
          inv = (longint'(1) << 20) / sd;
          for (int i = 0; i < int'(c.n); i++)
            sh[orr + AAW'(i)] = 16'(sat16(((sv(sh[ar + AAW'(i)]) - mean) * inv + 512) >>> 10));
        end
        OP_SOFTMAX: begin
          longint mx, sum, rc;
          longint e [512];
          mx = -32768;
          for (int i = 0; i < int'(c.n); i++) if (sv(sh[ar + AAW'(i)]) > mx) mx = sv(sh[ar + AAW'(i)]);
          sum = 0;
          for (int i = 0; i < int'(c.n); i++) begin e[i] = exp_ref(sv(sh[ar + AAW'(i)]) - mx); sum += e[i]; end
          rc = (longint'(1) << 45) / sum;
          for (int i = 0; i < int'(c.n); i++) sh[orr + AAW'(i)] = 16'((e[i] * rc + (longint'(1) << 34)) >> 35);
        end
        default: begin
          for (int i = 0; i < int'(c.n); i++) begin
            longint a, b, y;
            a = sv(sh[ar + AAW'(i)]); b = sv(sh[br + AAW'(i)]);
            if (c.op == OP_ADD) y = sat16(a + b);
            else if (c.op == OP_RELU) y = (a < 0) ? 0 : a;
            else y = (c.shift == 0) ? a : (a + (longint'(1) <<< (c.shift - 1))) >>> c.shift;
            sh[orr + AAW'(i)] = 16'(y);
          end
        end
      endcase
    end
  endtask

  function automatic cmd_t mk(op_t op, logic [AAW-1:0] a, logic [AAW-1:0] as, logic [AAW-1:0] b,
                              logic [AAW-1:0] bs, logic [AAW-1:0] o, logic [AAW-1:0] ors,
                              logic [AAW-1:0] ocs, int m, int n, int kd);
    cmd_t c;
    c = '0; c.op = op; c.a_base = a; c.a_stride = as; c.b_base = b; c.b_stride = bs;
    c.o_base = o; c.o_rs = ors; c.o_cs = ocs; c.m = CNTW'(m); c.n = CNTW'(n); c.kd = CNTW'(kd);
    return c;
  endfunction

  // dense layer from the Weight BRAM with bias (activation x weight scale)
  function automatic cmd_t dense(logic [AAW-1:0] a, logic [AAW-1:0] as, int w, int bias,
                                 logic [AAW-1:0] o, logic [AAW-1:0] ors, logic [AAW-1:0] ocs,
                                 int n, int kd);
    cmd_t c;
    c = mk(OP_MATMUL, a, as, AAW'(w), AAW'(kd), o, ors, ocs, NP, n, kd);
    c.b_wgt = 1; c.bias_en = 1; c.bias_base = WAW'(bias); c.bias_lsh = 5'(FRAC); c.shift = 6'(WFRAC);
    return c;
  endfunction

  function automatic void need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never happened: %s", what); end
  endfunction

  // -------------------------------------------------------------- host
  task automatic issue(cmd_t c);
    ref_cmd(c);
    cmd_valid <= 1; cmd <= c;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    cmd_valid <= 0;
    n_cmds++;
  endtask

  task automatic wait_idle();
    @(posedge clk);
    while (busy || n_done < n_cmds) @(posedge clk);
  endtask

  task automatic load_w(int base, int cnt, int lo, int hi);
    for (int i = base; i < base + cnt; i++) begin
      logic signed [7:0] w;
      w = 8'(lo + int'($urandom % (hi - lo + 1)));
      wg[i] = w;
      host_wr_en <= 1; host_wr_wgt <= 1; host_wr_addr <= AAW'(i); host_wr_data <= 16'(w);
      @(posedge clk);
    end
    host_wr_en <= 0;
  endtask

  task automatic check_area(string name, logic [AAW-1:0] base, int rows, int rs, int cols);
    int bad = 0;
    for (int r = 0; r < rows; r++)
      for (int i = 0; i < cols; i++) begin
        logic [AAW-1:0] a;
        a = base + AAW'(r * rs + i);
        host_rd_en <= 1; host_rd_addr <= a;
        @(posedge clk);
        host_rd_en <= 0;
        @(posedge clk);
        checks++;
        if (host_rd_data !== sh[a]) begin
          failures++; bad++;
          if (bad < 5) $display("%s r %0d c %0d got %0d exp %0d", name, r, i, host_rd_data, sh[a]);
        end
      end
    $display("%s: %0d elements, %0d wrong", name, rows * cols, bad);
  endtask

  initial begin
    cmd_t c;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < NP * PD; i++) begin
      logic signed [15:0] v;
      v = 16'($signed(16'($urandom)) >>> 4);
      sh[X_A + AAW'(i)] = v;
      host_wr_en <= 1; host_wr_wgt <= 0; host_wr_addr <= X_A + AAW'(i); host_wr_data <= v;
      @(posedge clk);
    end
    host_wr_en <= 0;

    // LN1
    issue(mk(OP_LN, X_A, PD, 0, 0, XLN_A, PD, 1, NP, PD, 0));
    for (int h = 0; h < NH; h++) begin
      // new head weights, loaded while the accelerator is idle
      wait_idle();
      load_w(WQ, 3 * 1024 + K * K, -32, 31);
      load_w(BQ, 4 * K, -128, 127);
      n_reload++;
      issue(dense(XLN_A, PD, WQ, BQ, Q_A, K, 1, K, PD));
      issue(dense(XLN_A, PD, WK, BK, K_A, K, 1, K, PD));
      issue(dense(XLN_A, PD, WV, BV, VT_A, 1, SROW, K, PD));
      c = mk(OP_MATMUL, Q_A, K, K_A, K, S_A, SROW, 1, NP, NP, K);
      c.quad = 1; c.shift = 6'(FRAC);
      issue(c);
      c = mk(OP_SCALE, S_A, SROW, 0, 0, S_A, SROW, 1, NP, NP, 0);
      c.shift = 6'd2;
      issue(c);
      issue(mk(OP_SOFTMAX, S_A, SROW, 0, 0, S_A, SROW, 1, NP, NP, 0));
      c = mk(OP_MATMUL, S_A, SROW, VT_A, SROW, Q_A, K, 1, NP, K, NP);
      c.shift = 6'(FRAC);
      issue(c);
      // head dense in quad mode: A rows of 16 at stride 16, four weight
      // columns per line, output at the head's column offset
      c = dense(Q_A, K, WD, BD, C_A + AAW'(h * K), PD, 1, K, K);
      c.quad = 1;
      issue(c);
    end
    wait_idle();
    check_area("C (concatenated heads)", C_A, NP, PD, PD);
    // skip connection, LN2, MLP, skip connection
    issue(mk(OP_ADD, X_A, PD, C_A, PD, X_A, PD, 1, NP, PD, 0));
    issue(mk(OP_LN, X_A, PD, 0, 0, XLN_A, PD, 1, NP, PD, 0));
    wait_idle();
    load_w(W1, 2 * PD * PD, -32, 31);
    load_w(B1, 2 * PD, -128, 127);
    n_reload++;
    c = dense(XLN_A, PD, W1, B1, C_A, PD, 1, PD, PD);
    c.relu = 1;
    issue(c);
    issue(dense(C_A, PD, W2, B2, S_A, PD, 1, PD, PD));
    issue(mk(OP_ADD, X_A, PD, S_A, PD, X_A, PD, 1, NP, PD, 0));
    wait_idle();
    $display("%0d commands, block finished at cycle %0d", n_cmds, $time / 10);
    checks++;
    if (n_done != n_cmds) failures++;
    check_area("X (block output)", X_A, NP, PD, PD);

    $display("reloads %0d, stalls %0d, quad+weights %0d, multi-part %0d, masked %0d, sat %0d, relu %0d",
             n_reload, n_stall, n_quad_w, n_multi, n_tail, n_sat, n_relu0);
    need("weight reload", n_reload);
    need("queue full stall", n_stall);
    need("quad mode with weights", n_quad_w);
    need("multi-part sum", n_multi);
    need("masked tail write", n_tail);
    need("ReLU clamp", n_relu0);
    need("layer norm", n_ln);
    need("softmax", n_sm);
    need("scaling", n_scale);
    need("add", n_add);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
