// tb_pe: self-checking testbench of the processing element.
// Streams 200 random vector pairs (plus corner values) into the PE, one per
// cycle with random gaps, and compares each adder-tree result with a dot
// product computed here in 64-bit arithmetic. Also checks the two-cycle
// latency from in_valid to out_valid.
//
// Interface and timing: no ports; a free-running clock of period 10, the
// block's default parameters, stimulus applied at clock edges. A watchdog
// counts a failure and stops after 200,000 cycles. Expected values come
// from the model in this file, not from the RTL. The closing line reports
// the number of checks and of failures.

module tb_pe;
  localparam int DW = 16, LEN = 16, SUMW = 2*DW + 4;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [LEN-1:0][DW-1:0] inp1, inp2;
  logic signed [SUMW-1:0] sum;
  int checks = 0, failures = 0, cyc = 0;
  longint exp_q[$];
  int     t_q[$];

  pe #(.DW(DW), .LEN(LEN)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    longint e; int t;
    e = exp_q.pop_front(); t = t_q.pop_front();
    checks++;
    if (longint'(sum) != e) begin failures++; $display("sum %0d exp %0d", sum, e); end
    checks++;
    if (cyc - t != 3) begin failures++; $display("latency %0d", cyc - t); end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int v = 0; v < 202; v++) begin
      longint e;
      logic [LEN-1:0][DW-1:0] x1, x2;
      e = 0;
      for (int i = 0; i < LEN; i++) begin
        if (v == 0) begin x1[i] = 16'h8000; x2[i] = 16'h8000; end
        else if (v == 1) begin x1[i] = 16'h7fff; x2[i] = 16'h8000; end
        else begin x1[i] = DW'($urandom); x2[i] = DW'($urandom); end
        e += longint'($signed(x1[i])) * longint'($signed(x2[i]));
      end
      inp1 <= x1; inp2 <= x2;
      in_valid <= 1;
      exp_q.push_back(e);
      t_q.push_back(cyc);
      @(posedge clk);
      if ($urandom % 4 == 0) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (6) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
