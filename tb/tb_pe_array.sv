// tb_pe_array: self-checking testbench of the four-PE array.
// Random 64-element operand lines in both modes: sum mode must return the
// 64-element dot product in lane 0, quad mode the four 16-element dot
// products in lanes 0..3. Results are computed here independently; the
// three-cycle latency is checked too.
//
// Interface and timing: no ports; a free-running clock of period 10, the
// block's default parameters, stimulus applied at clock edges. A watchdog
// counts a failure and stops after 200,000 cycles. Expected values come
// from the model in this file, not from the RTL. The closing line reports
// the number of checks and of failures.

module tb_pe_array;
  localparam int DW = 16, LEN = 16, NPE = 4, RESW = 2*DW + 4 + 2;
  logic clk = 0, rst_n = 0, in_valid = 0, quad = 0, out_valid, out_quad;
  logic [NPE*LEN-1:0][DW-1:0] a_vec, b_vec;
  logic signed [NPE-1:0][RESW-1:0] res;
  int checks = 0, failures = 0, cyc = 0, nsum = 0, nquad = 0;
  longint exp_q[$];   // 4 values per vector
  int     t_q[$];
  logic   m_q[$];

  pe_array #(.DW(DW), .LEN(LEN), .NPE(NPE)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    longint e[4]; int t; logic m;
    for (int p = 0; p < 4; p++) e[p] = exp_q.pop_front();
    t = t_q.pop_front(); m = m_q.pop_front();
    checks++;
    if (out_quad != m || cyc - t != 4) begin failures++; $display("mode/latency"); end
    if (m) begin
      nquad++;
      for (int p = 0; p < 4; p++) begin
        checks++;
        if (longint'($signed(res[p])) != e[p]) begin failures++; $display("quad lane %0d %0d exp %0d", p, res[p], e[p]); end
      end
    end else begin
      nsum++;
      checks++;
      if (longint'($signed(res[0])) != e[0] + e[1] + e[2] + e[3]) begin failures++; $display("sum %0d", res[0]); end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int v = 0; v < 300; v++) begin
      longint e[4];
      logic [NPE*LEN-1:0][DW-1:0] x1, x2;
      for (int p = 0; p < 4; p++) e[p] = 0;
      for (int i = 0; i < NPE*LEN; i++) begin
        x1[i] = DW'($urandom); x2[i] = DW'($urandom);
        e[i / LEN] += longint'($signed(x1[i])) * longint'($signed(x2[i]));
      end
      a_vec <= x1; b_vec <= x2;
      quad <= v[0] ^ v[3];
      in_valid <= 1;
      for (int p = 0; p < 4; p++) exp_q.push_back(e[p]);
      t_q.push_back(cyc);
      m_q.push_back(v[0] ^ v[3]);
      @(posedge clk);
      if ($urandom % 3 == 0) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (8) @(posedge clk);
    checks++;
    if (t_q.size() != 0 || nsum == 0 || nquad == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
