// tb_line_ram: self-checking testbench of the line-organised BRAM.
// Writes random lines with random element masks, keeps a shadow copy here,
// and reads on both ports with one-cycle latency, including a read of the
// line being written in the same cycle (must return the old data).
//
// Interface and timing: no ports; a free-running clock of period 10, the
// default width and line length with a 32-line depth (depth only changes
// the address width), stimulus applied at clock edges. A watchdog
// counts a failure and stops after 100,000 cycles. Expected values come
// from the model in this file, not from the RTL. The closing line reports
// the number of checks and of failures.

module tb_line_ram;
  localparam int W = 16, LINE = 64, DEPTH = 32, AW = 5;
  logic clk = 0;
  logic [1:0] rd_en = 0;
  logic [1:0][AW-1:0] rd_addr;
  logic [1:0][LINE-1:0][W-1:0] rd_data;
  logic wr_en = 0;
  logic [AW-1:0] wr_addr;
  logic [LINE-1:0] wr_mask;
  logic [LINE-1:0][W-1:0] wr_data;
  logic [LINE-1:0][W-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  line_ram #(.W(W), .LINE(LINE), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(negedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every line completely
    for (int a = 0; a < DEPTH; a++) begin
      for (int e = 0; e < LINE; e++) wr_data[e] = W'($urandom);
      wr_en <= 1; wr_addr <= AW'(a); wr_mask <= '1;
      shadow[a] = wr_data;
      @(negedge clk);
    end
    wr_en <= 0;
    for (int i = 0; i < 500; i++) begin
      logic [1:0][AW-1:0] ra;
      logic [LINE-1:0][W-1:0] expd [2];
      logic [AW-1:0] wa;
      logic [LINE-1:0] m;
      logic [LINE-1:0][W-1:0] d;
      ra[0] = AW'($urandom); ra[1] = AW'($urandom);
      wa = (i % 5 == 0) ? ra[0] : AW'($urandom);
      m = {$urandom, $urandom};
      for (int e = 0; e < LINE; e++) d[e] = W'($urandom);
      expd[0] = shadow[ra[0]]; expd[1] = shadow[ra[1]];
      rd_en <= 2'b11; rd_addr <= ra;
      wr_en <= 1; wr_addr <= wa; wr_mask <= m; wr_data <= d;
      for (int e = 0; e < LINE; e++) if (m[e]) shadow[wa][e] = d[e];
      @(negedge clk);
      rd_en <= 0; wr_en <= 0;
      #1;
      for (int p = 0; p < 2; p++) begin
        checks++;
        if (rd_data[p] != expd[p]) begin failures++; $display("port %0d line %0d mismatch", p, ra[p]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
