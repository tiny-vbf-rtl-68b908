// tb_accum_concat: self-checking testbench of accumulation and result shaping.
// Sends random sequences of 1 to 5 partial sums per output on four lanes
// with random bias, shift and ReLU settings and compares the released
// results with a model computed here (accumulate, add bias << bias_lsh,
// round-half-up right shift, ReLU, saturate to 16 bits). Saturation in both
// directions and ReLU clamping are counted and must each occur.
//
// Interface and timing: no ports; a free-running clock of period 10, the
// block's default parameters, stimulus applied at clock edges. A watchdog
// counts a failure and stops after 100,000 cycles. Expected values come
// from the model in this file, not from the RTL. The closing line reports
// the number of checks and of failures.

module tb_accum_concat;
  localparam int NL = 4, INW = 38, DW = 16, WW = 8, AW = 48;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0, last = 0, relu = 0, out_valid;
  logic signed [NL-1:0][INW-1:0] part;
  logic signed [NL-1:0][WW-1:0]  bias;
  logic [4:0] bias_lsh = 0;
  logic [5:0] shift = 0;
  logic signed [NL-1:0][DW-1:0] out;
  int checks = 0, failures = 0, n_satp = 0, n_satn = 0, n_relu = 0;
  int exp_q[$];

  accum_concat #(.NL(NL), .INW(INW), .DW(DW), .WW(WW), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    for (int l = 0; l < NL; l++) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      if (int'($signed(out[l])) != e) begin failures++; $display("lane %0d got %0d exp %0d", l, out[l], e); end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int o = 0; o < 300; o++) begin
      longint acc[NL];
      int np, sh, bl;
      logic signed [NL-1:0][WW-1:0] bv;
      logic rl;
      np = 1 + $urandom % 5;
      sh = $urandom % 24;
      bl = $urandom % 16;
      rl = ($urandom % 3 == 0);
      for (int l = 0; l < NL; l++) acc[l] = 0;
      for (int k = 0; k < np; k++) begin
        logic signed [NL-1:0][INW-1:0] pv;
        for (int l = 0; l < NL; l++) begin
          longint v;
          v = longint'($signed(32'($urandom))) >>> ($urandom % 20);
          pv[l] = INW'(v);
          acc[l] += v;
          if (k == 0) bv[l] = WW'($urandom);
        end
        part <= pv; bias <= bv;
        first <= (k == 0); last <= (k == np - 1);
        shift <= 6'(sh); bias_lsh <= 5'(bl); relu <= rl;
        in_valid <= 1;
        @(posedge clk);
        if ($urandom % 3 == 0) begin in_valid <= 0; @(posedge clk); end
      end
      for (int l = 0; l < NL; l++) begin
        longint f;
        f = acc[l] + (longint'($signed(bv[l])) <<< bl);
        if (sh > 0) f = (f + (longint'(1) <<< (sh - 1))) >>> sh;
        if (rl && f < 0) begin f = 0; n_relu++; end
        if (f > 32767) begin f = 32767; n_satp++; end
        if (f < -32768) begin f = -32768; n_satn++; end
        exp_q.push_back(int'(f));
      end
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n_satp == 0 || n_satn == 0 || n_relu == 0) failures++;
    $display("saturations +%0d -%0d, relu clamps %0d", n_satp, n_satn, n_relu);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
