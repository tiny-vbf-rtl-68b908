// tb_tvbf_accel: end-to-end testbench of the accelerator at its default size.
//
// Runs one attention head of a Tiny-VBF transformer block on the real
// problem size, np = 184 patches, projection dimension pd = 64, k = 16 per
// head, head index 1 of 4:
//    1. LN        Xln = LayerNorm(X)              (Input BRAM -> Output BRAM)
//    2-4. dense   Q = Xln Wq + bq, K = Xln Wk + bk, V^T = (Xln Wv + bv)^T
//    5. Q.K^T     S = Q K^T, quad mode              (184 x 184, row stride 192)
//    6. scaling   S = S / sqrt(k) = S >> 2
//    7. softmax   A = softmax(S) row by row
//    8. A.V       O = A V written at the head's column offset 16 of a
//                 64-wide concatenated output (reusing the Xln area)
//    9. add       skip connection X[:,16:32] += O[:,16:32]
//   10. ReLU      on the same columns (element-wise ReLU command)
//   11. dense     with ReLU and a bias, output 4 columns of F = relu(X W + b)
// The host loads X and the weights through the host write port, queues all
// eleven commands back to back (the four-entry queue fills and cmd_ready
// stalls the host), waits for busy to fall and reads every result area
// back through the host read port. A shadow model here computes each
// command from the same inputs with the documented fixed-point arithmetic
// and every element read back must match. Each mechanism (queue stall,
// sum mode with a masked tail, quad mode, bias, ReLU, transposed write,
// LN, softmax, scaling, add with saturation) is counted and must occur.
//
// Interface and timing: no ports; a free-running clock of period 10, the
// block's default parameters, stimulus applied at clock edges. A watchdog
// counts a failure and stops after 3,000,000 cycles. Expected values come
// from the model in this file, not from the RTL. The closing line reports
// the number of checks and of failures.

module tb_tvbf_accel;
  import tvbf_pkg::*;
  localparam int NP = 184, PD = 64, K = 16, HEAD = 1, SROW = 192;
  // element addresses of the areas
  localparam logic [AAW-1:0] X_A   = 17'd0;
  localparam logic [AAW-1:0] XLN_A = OUT_BASE;
  localparam logic [AAW-1:0] Q_A   = OUT_BASE + 17'd12288;
  localparam logic [AAW-1:0] K_A   = OUT_BASE + 17'd15360;
  localparam logic [AAW-1:0] VT_A  = OUT_BASE + 17'd18432;
  localparam logic [AAW-1:0] S_A   = OUT_BASE + 17'd21504;
  localparam logic [AAW-1:0] F_A   = OUT_BASE + 17'd57344;
  localparam logic [AAW-1:0] O_A   = XLN_A;
  localparam int WQ = 0, WK = 1024, WV = 2048, WF = 4096, BQ = 3072, BK = 3136, BV = 3200, BF = 3264;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy, cmd_done;
  cmd_t cmd;
  logic host_wr_en = 0, host_wr_wgt = 0, host_rd_en = 0;
  logic [AAW-1:0] host_wr_addr, host_rd_addr;
  data_t host_wr_data, host_rd_data;

  tvbf_accel dut (.*);

  logic signed [15:0] sh [1 << AAW];      // shadow activation memory
  logic               sh_v [1 << AAW];    // shadow element holds a defined value
  logic signed [7:0]  wg [1 << WAW];
  int checks = 0, failures = 0;
  int n_stall = 0, n_done = 0, n_sat = 0, n_relu0 = 0;
  cmd_t cmds [11];

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanisms, observed inside the design as they happen
  int cyc = 0, cyc_last = 0;
  int n_quad = 0, n_multi = 0, n_tail = 0, n_bias = 0, n_trans = 0;
  int n_ln = 0, n_sm = 0, n_scale = 0, n_add = 0, n_relu_op = 0, n_relu_mm = 0;
  always @(posedge clk) begin
    if (cmd_valid && !cmd_ready) n_stall++;
    if (cmd_done) begin
      $display("command %0d done after %0d cycles", n_done, cyc - cyc_last);
      cyc_last = cyc;
      n_done++;
    end
    if (dut.dot_start || dut.row_start) cyc_last = cyc;
    cyc++;
    if (dut.dot_start) begin
      if (dut.cur.quad) n_quad++;
      if (dut.cur.kd > CNTW'(LINE)) n_multi++;
      if (dut.cur.o_rs == 1 && dut.cur.o_cs > 1) n_trans++;
      if (dut.cur.relu) n_relu_mm++;
    end
    if (dut.u_dot.wr_en && dut.u_dot.wr_mask != '1) n_tail++;
    if (dut.u_dot.bias_rd_en) n_bias++;
    if (dut.row_start)
      case (dut.cur.op)
        OP_LN:      n_ln++;
        OP_SOFTMAX: n_sm++;
        OP_SCALE:   n_scale++;
        OP_ADD:     n_add++;
        OP_RELU:    n_relu_op++;
        default: ;
      endcase
  end

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

  // ---------------------------------------------------- shadow operations
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
            sh[c.o_base + AAW'(r) * c.o_rs + AAW'(n) * c.o_cs] = 16'(sat16(acc));
            sh_v[c.o_base + AAW'(r) * c.o_rs + AAW'(n) * c.o_cs] = 1;
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
          for (int i = 0; i < int'(c.n); i++) begin
            sh[orr + AAW'(i)] = 16'(sat16(((sv(sh[ar + AAW'(i)]) - mean) * inv + 512) >>> 10));
            sh_v[orr + AAW'(i)] = 1;
          end
        end
        OP_SOFTMAX: begin
          longint mx, sum, rc;
          longint e [512];
          mx = -32768; for (int i = 0; i < int'(c.n); i++) if (sv(sh[ar + AAW'(i)]) > mx) mx = sv(sh[ar + AAW'(i)]);
          sum = 0;
          for (int i = 0; i < int'(c.n); i++) begin e[i] = exp_ref(sv(sh[ar + AAW'(i)]) - mx); sum += e[i]; end
          rc = (longint'(1) << 45) / sum;
          for (int i = 0; i < int'(c.n); i++) begin
            sh[orr + AAW'(i)] = 16'((e[i] * rc + (longint'(1) << 34)) >> 35);
            sh_v[orr + AAW'(i)] = 1;
          end
        end
        default: begin
          for (int i = 0; i < int'(c.n); i++) begin
            longint a, b, y;
            a = sv(sh[ar + AAW'(i)]); b = sv(sh[br + AAW'(i)]);
            if (c.op == OP_ADD) y = sat16(a + b);
            else if (c.op == OP_RELU) begin y = (a < 0) ? 0 : a; if (a < 0) n_relu0++; end
            else y = (c.shift == 0) ? a : (a + (longint'(1) <<< (c.shift - 1))) >>> c.shift;
            sh[orr + AAW'(i)] = 16'(y);
            sh_v[orr + AAW'(i)] = 1;
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

  function automatic void need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never happened: %s", what); end
  endfunction

  // ---------------------------------------------------------------- host
  task automatic host_write(logic wgt, logic [AAW-1:0] a, logic signed [15:0] d);
    host_wr_en <= 1; host_wr_wgt <= wgt; host_wr_addr <= a; host_wr_data <= d;
    @(posedge clk);
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
        if (!sh_v[a] || host_rd_data !== sh[a]) begin
          failures++; bad++;
          if (bad < 5) $display("%s r %0d c %0d got %0d exp %0d", name, r, i, host_rd_data, sh[a]);
        end
      end
    $display("%s: %0d elements, %0d wrong", name, rows * cols, bad);
  endtask

  initial begin
    cmd_t c;
    int t0;
    for (int i = 0; i < (1 << AAW); i++) sh_v[i] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // input activations: about +-2.0, with a few extreme rows for saturation
    for (int r = 0; r < NP; r++)
      for (int i = 0; i < PD; i++) begin
        logic signed [15:0] v;
        v = (r < 2 && i >= 16 && i < 32) ? 16'sd32000 : 16'($signed(16'($urandom)) >>> 4);
        sh[X_A + AAW'(r * PD + i)] = v; sh_v[X_A + AAW'(r * PD + i)] = 1;
        host_write(0, X_A + AAW'(r * PD + i), v);
      end
    // weights about +-0.5 (6 fraction bits), stored transposed: row n of a
    // weight matrix holds its column n; biases use the full 8-bit range
    for (int i = 0; i < WF + 4 * PD; i++) begin
      logic signed [7:0] w;
      w = (i >= BQ && i < WF) ? 8'($urandom) : 8'(($urandom % 64) - 32);
      wg[i] = w;
      host_write(1, AAW'(i), 16'(w));
    end
    host_wr_en <= 0;
    @(posedge clk);

    // the command list
    cmds[0] = mk(OP_LN, X_A, PD, 0, 0, XLN_A, PD, 1, NP, PD, 0);
    c = mk(OP_MATMUL, XLN_A, PD, WQ, PD, Q_A, K, 1, NP, K, PD);
    c.b_wgt = 1; c.bias_en = 1; c.bias_base = BQ; c.bias_lsh = 5'(FRAC); c.shift = 6'(WFRAC);
    cmds[1] = c;
    c.b_base = WK; c.bias_base = BK; c.o_base = K_A;
    cmds[2] = c;
    c.b_base = WV; c.bias_base = BV; c.o_base = VT_A; c.o_rs = 1; c.o_cs = SROW;
    cmds[3] = c;
    c = mk(OP_MATMUL, Q_A, K, K_A, K, S_A, SROW, 1, NP, NP, K);
    c.quad = 1; c.shift = 6'(FRAC);
    cmds[4] = c;
    c = mk(OP_SCALE, S_A, SROW, 0, 0, S_A, SROW, 1, NP, NP, 0);
    c.shift = 6'd2;
    cmds[5] = c;
    cmds[6] = mk(OP_SOFTMAX, S_A, SROW, 0, 0, S_A, SROW, 1, NP, NP, 0);
    c = mk(OP_MATMUL, S_A, SROW, VT_A, SROW, O_A + AAW'(HEAD * K), PD, 1, NP, K, NP);
    c.shift = 6'(FRAC);
    cmds[7] = c;
    cmds[8] = mk(OP_ADD, X_A + AAW'(HEAD * K), PD, O_A + AAW'(HEAD * K), PD, X_A + AAW'(HEAD * K), PD, 1, NP, K, 0);
    cmds[9] = mk(OP_RELU, X_A + AAW'(HEAD * K), PD, 0, 0, X_A + AAW'(HEAD * K), PD, 1, NP, K, 0);
    c = mk(OP_MATMUL, X_A, PD, WF, PD, F_A, 4, 1, NP, 4, PD);
    c.b_wgt = 1; c.bias_en = 1; c.bias_base = BF; c.bias_lsh = 5'(FRAC); c.shift = 6'(WFRAC); c.relu = 1;
    cmds[10] = c;
    for (int i = 0; i < 11; i++) ref_cmd(cmds[i]);

    // queue everything back to back
    t0 = 0;
    for (int i = 0; i < 11; i++) begin
      cmd_valid <= 1; cmd <= cmds[i];
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
    end
    cmd_valid <= 0;
    while (busy || n_done < 11) begin @(posedge clk); t0++; end
    $display("11 commands done %0d cycles after the last was queued", t0);
    checks++;
    if (n_done != 11) failures++;

    check_area("Q",   Q_A,  NP, K, K);
    check_area("K",   K_A,  NP, K, K);
    check_area("V^T", VT_A, K, SROW, NP);
    check_area("A",   S_A,  NP, SROW, NP);
    check_area("O",   O_A + AAW'(HEAD * K), NP, PD, K);
    check_area("X",   X_A,  NP, PD, PD);
    check_area("F",   F_A,  NP, 4, 4);

    $display("queue stalls %0d, saturations %0d, relu clamps %0d", n_stall, n_sat, n_relu0);
    $display("quad %0d, multi-part %0d, masked writes %0d, bias reads %0d, transposed %0d, dense+relu %0d",
             n_quad, n_multi, n_tail, n_bias, n_trans, n_relu_mm);
    $display("LN %0d, softmax %0d, scale %0d, add %0d, relu %0d", n_ln, n_sm, n_scale, n_add, n_relu_op);
    need("queue full stall", n_stall);
    need("saturation", n_sat);
    need("ReLU clamp", n_relu0);
    need("quad mode", n_quad);
    need("multi-part sum", n_multi);
    need("masked tail write", n_tail);
    need("bias read", n_bias);
    need("transposed write", n_trans);
    need("dense with ReLU", n_relu_mm);
    need("layer norm", n_ln);
    need("softmax", n_sm);
    need("scaling", n_scale);
    need("add", n_add);
    need("ReLU command", n_relu_op);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
