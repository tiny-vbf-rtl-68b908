// tb_tvbf_embed: the input side of the encoder, projection and patch embedding.
//
// The network first projects every pixel of the time-of-flight-corrected
// frame from 128 channels to 16 features (a per-pixel dense layer,
// 368 x 128 x 128 -> 368 x 128 x 16). It then reshapes the result into 184
// patches of 4096 values (256 consecutive pixels x 16 features) and embeds
// each patch with a 4096 -> 64 dense layer plus a learned position
// embedding. A whole frame is far larger than the on-chip memories, so a
// host runs these layers in slices. This testbench runs such a slice on the
// accelerator at its default parameters:
//   - four slices of 128 pixels x 128 channels are loaded into the Input
//     BRAM one after another, and each is projected (dense, kd = 128, two
//     accumulated parts, bias) into the Output BRAM; with a row stride of
//     16 the 512 projected pixels lie there exactly as two reshaped patch
//     rows of 4096 values;
//   - the patch-embedding dense layer for two patches and two of the 64
//     embedding columns (kd = 4096: 64 parts accumulated per output, bias);
//   - the position embedding is added (element-wise add).
// Results are compared element by element with a shadow model here.
// Which pixels form a patch follows the row-major reshape of the network;
// the slicing is this testbench's choice.
//
// Interface and timing: no ports, clock period 10, the accelerator with its
// default parameters. A watchdog stops the run after 1,000,000 cycles as a
// failure. The closing line reports checks and failures.
module tb_tvbf_embed;
  import tvbf_pkg::*;
  localparam int PIX = 128, CH = 128, F = 16, PL = 4096, NPAT = 2, NE = 2;
  localparam logic [AAW-1:0] IN_A  = 17'd0;          // 128 x 128 pixel slice
  localparam logic [AAW-1:0] POS_A = OUT_BASE + 17'd12288; // position embedding rows, stride 64
  localparam logic [AAW-1:0] PAT_A = OUT_BASE;       // 2 x 4096 projected pixels = patch rows
  localparam logic [AAW-1:0] EMB_A = OUT_BASE + 17'd8192;  // embedded patches, stride 64
  localparam int WP = 0, BP = 2048, WE = 4096, BE = 12288;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy, cmd_done;
  cmd_t cmd;
  logic host_wr_en = 0, host_wr_wgt = 0, host_rd_en = 0;
  logic [AAW-1:0] host_wr_addr = '0, host_rd_addr = '0;
  data_t host_wr_data = '0, host_rd_data;

  tvbf_accel dut (.*);

  logic signed [15:0] sh [1 << AAW];
  logic signed [7:0]  wg [1 << WAW];
  int checks = 0, failures = 0, n_cmds = 0, n_done = 0, max_parts = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (cmd_done) n_done++;
    if (dut.dot_start && int'(dut.cur.kd + 63) / 64 > max_parts) max_parts = int'(dut.cur.kd + 63) / 64;
  end

  function automatic longint sat16(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction

  // shadow of OP_MATMUL (B from weights) and OP_ADD
  task automatic ref_cmd(cmd_t c);
    for (int r = 0; r < int'(c.m); r++)
      for (int n = 0; n < int'(c.n); n++) begin
        longint acc;
        logic [AAW-1:0] ar;
        ar = c.a_base + AAW'(r) * c.a_stride;
        if (c.op == OP_ADD) begin
          acc = sat16(longint'(sh[ar + AAW'(n)]) + longint'(sh[c.b_base + AAW'(r) * c.b_stride + AAW'(n)]));
          sh[c.o_base + AAW'(r) * c.o_rs + AAW'(n)] = 16'(acc);
        end else begin
          acc = 0;
          for (int k = 0; k < int'(c.kd); k++)
            acc += longint'(sh[ar + AAW'(k)]) * longint'(wg[WAW'(c.b_base + AAW'(n) * c.b_stride + AAW'(k))]);
          acc += longint'(wg[c.bias_base + WAW'(n)]) <<< c.bias_lsh;
          acc = (acc + (longint'(1) <<< (c.shift - 1))) >>> c.shift;
          sh[c.o_base + AAW'(r) * c.o_rs + AAW'(n) * c.o_cs] = 16'(sat16(acc));
        end
      end
  endtask

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

  task automatic host_w(logic wgt, logic [AAW-1:0] a, logic signed [15:0] d);
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
        if (host_rd_data !== sh[a]) begin
          failures++; bad++;
          if (bad < 5) $display("%s r %0d c %0d got %0d exp %0d", name, r, i, host_rd_data, sh[a]);
        end
      end
    $display("%s: %0d elements, %0d wrong", name, rows * cols, bad);
  endtask

  function automatic cmd_t dense(logic [AAW-1:0] a, logic [AAW-1:0] as, int w, int kd, int bias,
                                 logic [AAW-1:0] o, logic [AAW-1:0] ors, int m, int n);
    cmd_t c;
    c = '0; c.op = OP_MATMUL; c.b_wgt = 1; c.bias_en = 1;
    c.a_base = a; c.a_stride = as; c.b_base = AAW'(w); c.b_stride = AAW'(kd);
    c.o_base = o; c.o_rs = ors; c.o_cs = 1;
    c.m = CNTW'(m); c.n = CNTW'(n); c.kd = CNTW'(kd);
    c.bias_base = WAW'(bias); c.bias_lsh = 5'(FRAC); c.shift = 6'(WFRAC);
    return c;
  endfunction

  initial begin
    cmd_t c;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // projection weights (16 columns of 128, stored transposed) and biases;
    // patch-embedding weights are small (|w| <= 4/64) so that 4096-long
    // sums stay in range, as trained weights of such a layer would
    for (int i = 0; i < F * CH; i++) begin wg[WP + i] = 8'(int'($urandom % 64) - 32); host_w(1, AAW'(WP + i), 16'(wg[WP + i])); end
    for (int i = 0; i < F; i++)      begin wg[BP + i] = 8'($urandom);                 host_w(1, AAW'(BP + i), 16'(wg[BP + i])); end
    for (int i = 0; i < NE * PL; i++) begin wg[WE + i] = 8'(int'($urandom % 9) - 4);  host_w(1, AAW'(WE + i), 16'(wg[WE + i])); end
    for (int i = 0; i < NE; i++)     begin wg[BE + i] = 8'($urandom);                 host_w(1, AAW'(BE + i), 16'(wg[BE + i])); end
    // position embedding rows
    for (int p = 0; p < NPAT; p++)
      for (int e = 0; e < NE; e++) begin
        sh[POS_A + AAW'(p * 64 + e)] = 16'($signed(16'($urandom)) >>> 5);
        host_w(0, POS_A + AAW'(p * 64 + e), sh[POS_A + AAW'(p * 64 + e)]);
      end
    host_wr_en <= 0;

    // projection, one 128-pixel slice at a time
    for (int s = 0; s < NPAT * PL / (PIX * F); s++) begin
      wait_idle();
      for (int i = 0; i < PIX * CH; i++) begin
        sh[IN_A + AAW'(i)] = 16'($signed(16'($urandom)) >>> 4);
        host_w(0, IN_A + AAW'(i), sh[IN_A + AAW'(i)]);
      end
      host_wr_en <= 0;
      issue(dense(IN_A, CH, WP, CH, BP, PAT_A + AAW'(s * PIX * F), F, PIX, F));
    end
    wait_idle();
    check_area("projected pixels", PAT_A, NPAT * PL / F, F, F);

    // patch embedding: 2 patches x 2 columns, 4096-long dot products
    issue(dense(PAT_A, PL, WE, PL, BE, EMB_A, 64, NPAT, NE));
    c = '0; c.op = OP_ADD; c.a_base = EMB_A; c.a_stride = 64; c.b_base = POS_A; c.b_stride = 64;
    c.o_base = EMB_A; c.o_rs = 64; c.o_cs = 1; c.m = CNTW'(NPAT); c.n = CNTW'(NE);
    issue(c);
    wait_idle();
    check_area("embedded patches", EMB_A, NPAT, 64, NE);

    $display("longest dot product: %0d parts of 64", max_parts);
    checks++;
    if (max_parts != PL / 64) begin failures++; $display("4096-long accumulation did not run"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
