// tb_layer_norm: self-checking testbench of layer normalisation.
// A row memory model here answers the unit's read requests one cycle later
// and collects its writes. Rows of length 64 (the projection dimension),
// 184 (the number of patches), 1 and random lengths, with random, constant
// and large values, are normalised and compared element by element with
// a fixed-point model computed here (mean truncated toward zero, variance
// floored, integer square root, reciprocal 2^20/std, rounded product,
// saturation). Each result is also compared with the real-valued
// normalisation (within 3 % of full scale plus 4 LSB).
//
// Interface and timing: no ports; a free-running clock of period 10, the
// block's default parameters, stimulus applied at clock edges. A watchdog
// counts a failure and stops after 400,000 cycles. Expected values come
// from the model in this file, not from the RTL. The closing line reports
// the number of checks and of failures.

module tb_layer_norm;
  localparam int DW = 16, FRAC = 10, IW = 9;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [IW-1:0] len;
  logic rd_req, rd_valid = 0, wr_en;
  logic [IW-1:0] rd_idx, wr_idx;
  logic signed [DW-1:0] rd_data, wr_data;
  logic signed [DW-1:0] row [512];
  logic signed [DW-1:0] res [512];
  int nwr;
  int checks = 0, failures = 0;

  layer_norm #(.DW(DW), .FRAC(FRAC), .IW(IW)) dut (.*);

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

  function automatic longint isqrt_ref(longint v);
    longint r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  task automatic run_row(int n, int kind);
    longint s, mean, ssq, var_, sd, inv;
    real rm, rv;
    for (int i = 0; i < n; i++) begin
      case (kind)
        0: row[i] = DW'($signed(16'($urandom)) >>> 3);          // about +-4.0
        1: row[i] = 16'sd700;                                     // constant row
        2: row[i] = DW'($signed(16'($urandom)));                 // full range
        default: row[i] = DW'(($urandom % 512) - 256 + 2000);    // offset, small spread
      endcase
    end
    @(posedge clk);
    nwr <= 0;
    len <= IW'(n); start <= 1;
    @(posedge clk);
    start <= 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    // reference
    s = 0; for (int i = 0; i < n; i++) s += row[i];
    mean = (s < 0) ? -((-s) / n) : s / n;
    ssq = 0; for (int i = 0; i < n; i++) ssq += (row[i] - mean) * (row[i] - mean);
    var_ = ssq / n;
    if (var_ > 64'hffff_ffff) var_ = 64'hffff_ffff;
    sd = isqrt_ref(var_); if (sd == 0) sd = 1;
    inv = (longint'(1) << 20) / sd;
    rm = 0; for (int i = 0; i < n; i++) rm += row[i];
    rm = rm / n;
    rv = 0; for (int i = 0; i < n; i++) rv += (row[i] - rm) * (row[i] - rm);
    rv = rv / n;
    checks++;
    if (nwr != n) begin failures++; $display("len %0d: %0d writes", n, nwr); end
    for (int i = 0; i < n; i++) begin
      longint y;
      real yr;
      y = ((row[i] - mean) * inv + 512) >>> 10;
      if (y > 32767) y = 32767;
      if (y < -32768) y = -32768;
      checks++;
      if (longint'(res[i]) != y) begin failures++; $display("len %0d i %0d got %0d exp %0d", n, i, res[i], y); end
      if (kind != 1) begin
        yr = (row[i] - rm) / $sqrt(rv) * 1024.0;
        checks++;
        if ((yr - res[i]) > 0.03 * 1024 + 4 || (res[i] - yr) > 0.03 * 1024 + 4) begin
          failures++; $display("len %0d i %0d got %0d real %f", n, i, res[i], yr);
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_row(64, 0);
    run_row(184, 0);
    run_row(64, 1);
    run_row(1, 1);
    run_row(64, 2);
    run_row(184, 3);
    for (int k = 0; k < 6; k++) run_row(2 + $urandom % 300, k % 4 == 1 ? 0 : k % 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
