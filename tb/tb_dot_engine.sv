// tb_dot_engine: self-checking testbench of the dot-product path.
// Memory models here hold activations and weights as element arrays and
// answer the engine's line reads one cycle later; its masked line writes
// are applied element by element. Four commands cover the paper's three
// dataflows and the write-back options:
//   1. dense layer: B from the weights, kd = 128 (two 64-element parts
//      accumulated), bias, ReLU;
//   2. attention x value: B from activation memory, kd = 184 (three parts,
//      the last one masked), row stride 192;
//   3. attention scores Q.K^T in quad mode: kd = 16, four results per
//      cycle, N = 10 so the last group has only two valid columns;
//   4. value projection written transposed (o_rs = 1, o_cs = 192).
// Every output is compared with sums computed here, and everything outside
// the outputs must stay untouched. The cycle count of each command must be
// its number of parts plus the fixed pipeline latency of 7 cycles.
//
// Interface and timing: no ports; a free-running clock of period 10, the
// block's default parameters, stimulus applied at clock edges. A watchdog
// counts a failure and stops after 200,000 cycles. Expected values come
// from the model in this file, not from the RTL. The closing line reports
// the number of checks and of failures.

module tb_dot_engine;
  import tvbf_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  cmd_t cmd;
  logic a_rd_en, b_rd_en, bias_rd_en, wr_en;
  logic [AAW-1:0] a_rd_addr, b_rd_addr;
  logic [WAW-1:0] bias_rd_addr;
  dline_t a_rd_line, b_rd_act, wr_data;
  wline_t b_rd_wgt, bias_rd_line;
  logic [AAW-LB-1:0] wr_line;
  logic [LINE-1:0] wr_mask;

  logic signed [15:0] act [1 << AAW];
  logic signed [15:0] ref_act [1 << AAW];
  logic signed [7:0]  wgt [1 << WAW];
  int checks = 0, failures = 0;

  dot_engine dut (.*);

  always #5 clk = ~clk;

  function automatic dline_t aline(logic [AAW-1:0] a);
    dline_t l;
    for (int e = 0; e < LINE; e++) l[e] = act[{a[AAW-1:LB], LB'(0)} + e];
    return l;
  endfunction
  function automatic wline_t wline(logic [WAW-1:0] a);
    wline_t l;
    for (int e = 0; e < LINE; e++) l[e] = wgt[{a[WAW-1:LB], LB'(0)} + e];
    return l;
  endfunction

  always @(posedge clk) begin
    if (a_rd_en) a_rd_line <= aline(a_rd_addr);
    if (b_rd_en) begin b_rd_act <= aline(b_rd_addr); b_rd_wgt <= wline(WAW'(b_rd_addr)); end
    if (bias_rd_en) bias_rd_line <= wline(bias_rd_addr);
    if (wr_en) for (int e = 0; e < LINE; e++) if (wr_mask[e]) act[{wr_line, LB'(0)} + e] <= wr_data[e];
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(cmd_t c);
    int cyc, parts;
    // reference result into ref_act
    for (int i = 0; i < (1 << AAW); i++) ref_act[i] = act[i];
    for (int m = 0; m < int'(c.m); m++)
      for (int n = 0; n < int'(c.n); n++) begin
        longint acc, f;
        acc = 0;
        for (int k = 0; k < int'(c.kd); k++) begin
          longint av, bv;
          av = act[c.a_base + m * c.a_stride + k];
          bv = c.b_wgt ? longint'(wgt[WAW'(c.b_base + n * c.b_stride + k)]) : longint'(act[c.b_base + n * c.b_stride + k]);
          acc += av * bv;
        end
        f = acc;
        if (c.bias_en) f += longint'(wgt[c.bias_base + n]) <<< c.bias_lsh;
        if (c.shift != 0) f = (f + (longint'(1) <<< (c.shift - 1))) >>> c.shift;
        if (c.relu && f < 0) f = 0;
        if (f > 32767) f = 32767;
        if (f < -32768) f = -32768;
        ref_act[c.o_base + m * c.o_rs + n * c.o_cs] = 16'(f);
      end
    parts = c.quad ? int'(c.m) * ((int'(c.n) + 3) / 4) : int'(c.m) * int'(c.n) * ((int'(c.kd) + 63) / 64);
    cmd <= c; start <= 1;
    @(posedge clk);
    start <= 0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    @(posedge clk);
    checks++;
    if (cyc != parts + 7) begin failures++; $display("cycles %0d, parts %0d", cyc, parts); end
    for (int i = 0; i < (1 << AAW); i++) begin
      if (act[i] !== ref_act[i]) begin
        failures++;
        if (failures < 10) $display("addr %h got %0d exp %0d", i, act[i], ref_act[i]);
      end
    end
    checks += int'(c.m) * int'(c.n);
  endtask

  initial begin
    cmd_t c;
    for (int i = 0; i < (1 << AAW); i++) act[i] = 16'($signed(16'($urandom)) >>> 4);
    for (int i = 0; i < (1 << WAW); i++) wgt[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // 1. dense with weights, two parts, bias, ReLU
    c = '0; c.op = OP_MATMUL; c.b_wgt = 1; c.bias_en = 1; c.relu = 1;
    c.a_base = 17'd0; c.a_stride = 17'd128; c.b_base = 17'd1024; c.b_stride = 17'd128;
    c.o_base = OUT_BASE; c.o_rs = 17'd64; c.o_cs = 17'd1;
    c.m = 5; c.n = 7; c.kd = 128; c.shift = 6'(WFRAC); c.bias_lsh = 5'(FRAC); c.bias_base = 14'd300;
    run(c);
    // 2. attention x value, three parts with a masked tail
    c = '0; c.op = OP_MATMUL;
    c.a_base = OUT_BASE + 17'd4096; c.a_stride = 17'd192; c.b_base = 17'd2048; c.b_stride = 17'd192;
    c.o_base = OUT_BASE + 17'd512; c.o_rs = 17'd64; c.o_cs = 17'd1;
    c.m = 4; c.n = 16; c.kd = 184; c.shift = 6'(FRAC);
    run(c);
    // 3. attention scores in quad mode
    c = '0; c.op = OP_MATMUL; c.quad = 1;
    c.a_base = 17'd8192; c.a_stride = 17'd16; c.b_base = 17'd9216; c.b_stride = 17'd16;
    c.o_base = OUT_BASE + 17'd16384; c.o_rs = 17'd192; c.o_cs = 17'd1;
    c.m = 6; c.n = 10; c.kd = 16; c.shift = 6'(FRAC);
    run(c);
    // 4. value projection written transposed
    c = '0; c.op = OP_MATMUL; c.b_wgt = 1;
    c.a_base = 17'd0; c.a_stride = 17'd64; c.b_base = 17'd4096; c.b_stride = 17'd64;
    c.o_base = OUT_BASE + 17'd32768; c.o_rs = 17'd1; c.o_cs = 17'd192;
    c.m = 9; c.n = 16; c.kd = 64; c.shift = 6'(WFRAC);
    run(c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
