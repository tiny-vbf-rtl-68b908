// tvbf_pkg: types and constants shared by the Tiny-VBF encoder accelerator.
//
// Number formats (Hybrid-2 scheme): activations are 16-bit two's complement
// with FRAC fraction bits, weights and biases are 8-bit with WFRAC fraction
// bits, softmax internals are 24 bits. The widths are the paper's; the
// fraction-bit split is this design's choice.
//
// Memory organisation: every BRAM is read and written in lines of LINE = 64
// elements (the width of one PE-array operand, 4 PEs x 16). Activations live
// in one element address space of AAW bits: addresses below OUT_BASE are the
// Input BRAM, addresses from OUT_BASE up are the Output BRAM. Weights have
// their own WAW-bit element address space.
//
// A command (cmd_t) describes one layer operation. The accelerator keeps a
// small queue of them and executes one at a time.
package tvbf_pkg;

  localparam int DW     = 16;   // activation / intermediate width (Table 3, Hybrid-2)
  localparam int WW     = 8;    // weight width (Table 3)
  localparam int SW     = 24;   // softmax internal width (Table 3)
  localparam int FRAC   = 10;   // fraction bits of an activation
  localparam int WFRAC  = 6;    // fraction bits of a weight
  localparam int NPE    = 4;    // processing elements
  localparam int LEN    = 16;   // multipliers per PE
  localparam int LINE   = NPE * LEN;  // elements per memory line (64)
  localparam int LB     = $clog2(LINE);
  localparam int PSUMW  = 2 * DW + $clog2(LEN);          // PE result width
  localparam int ARRW   = PSUMW + $clog2(NPE);           // PE-array result width
  localparam int AAW    = 17;   // activation element address width
  localparam int WAW    = 14;   // weight element address width
  localparam int CNTW   = 13;   // loop count width (up to 4096)
  localparam logic [AAW-1:0] OUT_BASE = 17'h10000;

  typedef logic signed [DW-1:0] data_t;
  typedef logic signed [WW-1:0] wgt_t;
  typedef logic [LINE-1:0][DW-1:0] dline_t;
  typedef logic [LINE-1:0][WW-1:0] wline_t;

  typedef enum logic [2:0] {
    OP_MATMUL  = 3'd0,   // C = A x B^T on the PE array (dense, Q.K^T, A.V)
    OP_LN      = 3'd1,   // layer normalisation of each row
    OP_SOFTMAX = 3'd2,   // softmax of each row
    OP_ADD     = 3'd3,   // element-wise saturating add (skip connection)
    OP_RELU    = 3'd4,   // element-wise ReLU
    OP_SCALE   = 3'd5    // element-wise arithmetic right shift (1/sqrt(k))
  } op_t;

  typedef enum logic [1:0] {
    EW_ADD   = 2'd0,
    EW_RELU  = 2'd1,
    EW_SCALE = 2'd2
  } ew_op_t;

  // One layer operation. For OP_MATMUL: out[m][n] = sum_k A[m][k] * B[n][k],
  // A row m at a_base + m*a_stride, B row n (a column of the weight matrix)
  // at b_base + n*b_stride, result at o_base + m*o_rs + n*o_cs.
  // For row operations the m rows have n elements each, rows at a_base +
  // r*a_stride (and b_base + r*b_stride for OP_ADD), results at o_base + r*o_rs.
  typedef struct packed {
    op_t              op;
    logic             quad;      // MATMUL: four 16-long dot products per cycle
    logic             b_wgt;     // MATMUL: B from the Weight BRAM
    logic             relu;      // MATMUL: ReLU on the results
    logic             bias_en;   // MATMUL: add bias[n] from the Weight BRAM
    logic [AAW-1:0]   a_base;
    logic [AAW-1:0]   a_stride;
    logic [AAW-1:0]   b_base;
    logic [AAW-1:0]   b_stride;
    logic [AAW-1:0]   o_base;
    logic [AAW-1:0]   o_rs;
    logic [AAW-1:0]   o_cs;
    logic [CNTW-1:0]  m;
    logic [CNTW-1:0]  n;
    logic [CNTW-1:0]  kd;
    logic [5:0]       shift;     // result right shift (MATMUL, SCALE)
    logic [4:0]       bias_lsh;  // bias left shift to the accumulator scale
    logic [WAW-1:0]   bias_base;
  } cmd_t;

endpackage
