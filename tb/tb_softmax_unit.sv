// tb_softmax_unit: self-checking testbench of the row softmax.
// A row memory model answers read requests one cycle later and collects the
// writes. Rows of 184 scores (one attention row for 184 patches), 16, 1 and
// random lengths with random, equal and widely spread values are processed.
// Each probability is compared with a fixed-point model written here from
// the documented method (max, 2^(y log2 e) with the second-order fraction
// polynomial, 24-bit sum, reciprocal 2^45/sum, rounded product) and with
// the real softmax (within 0.01 + 1 LSB); the probabilities of a row must
// add up to 1.0 within n LSB.
//
// Interface and timing: no ports; a free-running clock of period 10, the
// block's default parameters, stimulus applied at clock edges. A watchdog
// counts a failure and stops after 400,000 cycles. Expected values come
// from the model in this file, not from the RTL. The closing line reports
// the number of checks and of failures.

module tb_softmax_unit;
  localparam int DW = 16, FRAC = 10, SW = 24, IW = 9;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [IW-1:0] len;
  logic rd_req, rd_valid = 0, wr_en;
  logic [IW-1:0] rd_idx, wr_idx;
  logic signed [DW-1:0] rd_data, wr_data;
  logic signed [DW-1:0] row [512];
  logic signed [DW-1:0] res [512];
  int nwr;
  int checks = 0, failures = 0;

  softmax_unit #(.DW(DW), .FRAC(FRAC), .SW(SW), .IW(IW)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    rd_valid <= rd_req;
    rd_data  <= row[rd_idx];
    if (wr_en) begin res[wr_idx] <= wr_data; nwr <= nwr + 1; end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint exp_ref(longint y);   // y <= 0, 10 fraction bits
    longint t, z, ip, f, m;
    t = y * 23637;
    z = t >>> 14;
    ip = z >>> 10;
    f = z & 1023;
    m = (longint'(1) << 22) + f * 2689 + ((f * f * 1407) >> 10);
    if (-ip >= 24) return 0;
    return m >> (-ip);
  endfunction

  task automatic run_row(int n, int kind);
    longint mx, sum, r, tot;
    real rmx, rs;
    for (int i = 0; i < n; i++) begin
      case (kind)
        0: row[i] = DW'($signed(16'($urandom)) >>> 4);   // about +-2.0
        1: row[i] = 16'sd300;                             // all equal
        default: row[i] = DW'($signed(16'($urandom)));   // full range
      endcase
    end
    @(posedge clk);
    nwr <= 0;
    len <= IW'(n); start <= 1;
    @(posedge clk);
    start <= 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    mx = -32768; for (int i = 0; i < n; i++) if (row[i] > mx) mx = row[i];
    sum = 0; for (int i = 0; i < n; i++) sum += exp_ref(row[i] - mx);
    r = (longint'(1) << 45) / sum;
    rs = 0; for (int i = 0; i < n; i++) rs += $exp(real'(longint'(row[i]) - mx) / 1024.0);
    checks++;
    if (nwr != n) begin failures++; $display("len %0d: %0d writes", n, nwr); end
    tot = 0;
    for (int i = 0; i < n; i++) begin
      longint p;
      real pr;
      p = (exp_ref(row[i] - mx) * r + (longint'(1) << 34)) >> 35;
      pr = $exp(real'(longint'(row[i]) - mx) / 1024.0) / rs * 1024.0;
      tot += res[i];
      checks++;
      if (longint'(res[i]) != p) begin failures++; $display("len %0d i %0d got %0d exp %0d", n, i, res[i], p); end
      checks++;
      if (pr - res[i] > 11.24 || res[i] - pr > 11.24) begin failures++; $display("len %0d i %0d got %0d real %f", n, i, res[i], pr); end
    end
    checks++;
    if (tot > 1024 + n || tot < 1024 - n) begin failures++; $display("len %0d sum %0d", n, tot); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_row(184, 0);
    run_row(16, 0);
    run_row(184, 1);
    run_row(1, 0);
    run_row(184, 2);
    for (int k = 0; k < 6; k++) run_row(2 + $urandom % 400, k % 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
