// tb_eltwise_unit: self-checking testbench of the element-wise unit.
// Random operands for Add (with saturation in both directions), ReLU and
// Scaling (rounded arithmetic right shift, including shift 0 and the
// attention shift 2); results are computed here with 32-bit integers.
//
// Interface and timing: no ports; a free-running clock of period 10, the
// block's default parameters, stimulus applied at clock edges. A watchdog
// counts a failure and stops after 100,000 cycles. Expected values come
// from the model in this file, not from the RTL. The closing line reports
// the number of checks and of failures.

module tb_eltwise_unit;
  import tvbf_pkg::*;
  logic clk = 0;
  ew_op_t op;
  logic signed [15:0] a, b, y;
  logic [3:0] shift;
  int checks = 0, failures = 0, nsat = 0;

  eltwise_unit #(.DW(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(negedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      int e, av, bv, s;
      av = $signed(16'($urandom)); bv = $signed(16'($urandom)); s = $urandom % 12;
      if (i % 3 == 0) begin
        op = EW_ADD; e = av + bv;
        if (e > 32767) begin e = 32767; nsat++; end
        if (e < -32768) begin e = -32768; nsat++; end
      end else if (i % 3 == 1) begin
        op = EW_RELU; e = av < 0 ? 0 : av;
      end else begin
        op = EW_SCALE;
        if (i % 7 == 0) s = 2;
        e = (s == 0) ? av : (av + (1 <<< (s - 1))) >>> s;
        if (e > 32767) e = 32767;
      end
      a = 16'(av); b = 16'(bv); shift = 4'(s);
      @(negedge clk);
      checks++;
      if (int'(y) != e) begin failures++; $display("op %0d a %0d b %0d s %0d y %0d exp %0d", op, av, bv, s, y, e); end
    end
    checks++;
    if (nsat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
