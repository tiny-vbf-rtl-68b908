// tb_isqrt: self-checking testbench of the integer square root.
// Random radicands of all sizes and the corners 0, 1, 2^32-1 and perfect
// squares; checks r*r <= x < (r+1)^2 and the W/2+1 cycle latency.
//
// Interface and timing: no ports; a free-running clock of period 10, the
// block's default parameters, stimulus applied at clock edges. A watchdog
// counts a failure and stops after 100,000 cycles. Expected values come
// from the model in this file, not from the RTL. The closing line reports
// the number of checks and of failures.

module tb_isqrt;
  localparam int W = 32;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [W-1:0] x;
  logic [W/2-1:0] root;
  int checks = 0, failures = 0;

  isqrt #(.W(W)) dut (.*);

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
    for (int i = 0; i < 400; i++) begin
      logic [W-1:0] v;
      longint r;
      int lat;
      v = $urandom >> ($urandom % 32);
      if (i == 0) v = 0;
      if (i == 1) v = 1;
      if (i == 2) v = '1;
      if (i == 3) v = 32'd65536 * 32'd65535;
      if (i >= 4 && i < 20) v = (32'($urandom) % 65536) ** 2;
      x <= v; start <= 1;
      @(negedge clk);
      start <= 0;
      lat = 0;
      do begin @(negedge clk); lat++; end while (!done);
      r = longint'(root);
      checks++;
      if (!(r * r <= longint'(v) && (r + 1) * (r + 1) > longint'(v))) begin
        failures++; $display("sqrt(%0d) = %0d", v, root);
      end
      checks++;
      if (lat != W/2) begin failures++; $display("latency %0d", lat); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
