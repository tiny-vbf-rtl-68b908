// tb_divider: self-checking testbench of the restoring divider.
// Random and corner dividends/divisors (small, large, equal, divisor 1,
// divisor 0); checks the quotient against the / operator and the latency
// of W+1 cycles from start to done.
//
// Interface and timing: no ports; a free-running clock of period 10, the
// block's default parameters, stimulus applied at clock edges. A watchdog
// counts a failure and stops after 100,000 cycles. Expected values come
// from the model in this file, not from the RTL. The closing line reports
// the number of checks and of failures.

module tb_divider;
  localparam int W = 48;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [W-1:0] num, den, quo;
  int checks = 0, failures = 0;

  divider #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(negedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n <= 1;
    @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      logic [W-1:0] a, b, e;
      int lat;
      a = {$urandom, $urandom} >> ($urandom % 48);
      b = {$urandom, $urandom} >> (16 + $urandom % 32);
      if (i == 0) begin a = 48'h8000_0000_0000; b = 48'd1; end
      if (i == 1) begin a = 48'h4000_0000_0000; b = 48'd4194305; end
      if (i == 2) begin a = 48'd12345; b = 48'd12345; end
      if (i == 3) begin a = 48'd5; b = 48'd9; end
      if (i == 4) begin a = 48'd77; b = 48'd0; end
      if (i == 5) begin a = '1; b = '1; end
      num <= a; den <= b; start <= 1;
      @(negedge clk);
      start <= 0;
      lat = 0;
      do begin @(negedge clk); lat++; end while (!done);
      e = (b == 0) ? '1 : a / b;
      checks++;
      if (quo != e) begin failures++; $display("%0d / %0d = %0d exp %0d", a, b, quo, e); end
      checks++;
      if (lat != W) begin failures++; $display("latency %0d", lat); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
