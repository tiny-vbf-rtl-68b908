// layer_norm: layer normalisation of one row of activations.
//
// y_i = (x_i - mean) / sqrt(var + eps) over the `len` elements of a row,
// computed in three passes that each read the row once, one element per
// clock, through a request/response port (the row stays in the BRAM):
//   pass 1  sum of x        -> mean = sum / len       (division unit)
//   pass 2  sum of (x-mean)^2 -> var = ssq / len      (division unit)
//           std = isqrt(var) (sqrt unit), inv = 2^(2*FRAC) / std (division)
//   pass 3  y = (x - mean) * inv, rounded and saturated, written back.
// Data are DW-bit two's complement with FRAC fraction bits. eps is one LSB
// of the standard deviation (std is forced to at least 1 LSB). The learned
// scale and offset of a Keras LayerNormalization are not applied here: they
// fold exactly into the Dense layer that follows every normalisation in the
// network. The paper names the block; the three-pass method, the widths and
// the eps are this design's choices.
//
// Interface and timing: pulse start with len (>= 1). The unit issues rd_req
// with rd_idx; the caller returns rd_data with rd_valid in order (one cycle
// later in this accelerator). Results appear on wr_en/wr_idx/wr_data. done
// pulses after the last write. A row takes about 3*len + 2*W_DIV + W_SQRT/2
// + 10 cycles.
module layer_norm #(
  parameter int DW   = 16,
  parameter int FRAC = 10,
  parameter int IW   = 9
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [IW-1:0]        len,
  output logic                 busy,
  output logic                 done,
  output logic                 rd_req,
  output logic [IW-1:0]        rd_idx,
  input  logic                 rd_valid,
  input  logic signed [DW-1:0] rd_data,
  output logic                 wr_en,
  output logic [IW-1:0]        wr_idx,
  output logic signed [DW-1:0] wr_data
);

  localparam int DIVW = 48;
  localparam int SQW  = 32;
  localparam int SUMW = DW + IW + 1;
  localparam int SSQW = 2 * (DW + 1) + IW;

  typedef enum logic [3:0] {
    S_IDLE, S_P1, S_MEAN, S_P2, S_VAR, S_SQRT, S_INV, S_P3, S_DONE
  } state_t;

  state_t                  state;
  logic [IW-1:0]           n, iss, ret;
  logic                    issuing;
  logic signed [SUMW-1:0]  sum;
  logic [SSQW-1:0]         ssq;
  logic signed [DW:0]      mean;
  logic [DIVW-1:0]         inv;

  logic                    div_start, div_busy, div_done;
  logic [DIVW-1:0]         div_num, div_den, div_quo;
  logic                    sq_start, sq_busy, sq_done;
  logic [SQW-1:0]          sq_x;
  logic [SQW/2-1:0]        sq_root;

  divider #(.W(DIVW)) u_div (
    .clk(clk), .rst_n(rst_n), .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quo(div_quo));

  isqrt #(.W(SQW)) u_sqrt (
    .clk(clk), .rst_n(rst_n), .start(sq_start), .x(sq_x),
    .busy(sq_busy), .done(sq_done), .root(sq_root));

  // element arithmetic on the returning data
  logic signed [DW+1:0]        dev;
  logic [2*(DW+1)-1:0]         dev_sq;
  logic signed [DW+1+DIVW:0]   prod;
  logic signed [DW+1+DIVW:0]   yr;

  always_comb begin
    dev    = (DW+2)'(rd_data) - (DW+2)'(mean);
    dev_sq = (2*(DW+1))'(dev * dev);
    prod   = (DW+2+DIVW)'(dev) * $signed({1'b0, inv});
    yr     = (prod + (DW+2+DIVW)'(1 << (FRAC - 1))) >>> FRAC;
  end

  assign rd_req = issuing;
  assign rd_idx = iss;
  assign busy   = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      issuing   <= 1'b0;
      done      <= 1'b0;
      wr_en     <= 1'b0;
      div_start <= 1'b0;
      sq_start  <= 1'b0;
      iss       <= '0;
      ret       <= '0;
      n         <= '0;
    end else begin
      done      <= 1'b0;
      wr_en     <= 1'b0;
      div_start <= 1'b0;
      sq_start  <= 1'b0;
      // read issue: one request per cycle until len issued
      if (issuing) begin
        if (iss == n - 1'b1) issuing <= 1'b0;
        iss <= iss + 1'b1;
      end
      unique case (state)
        S_IDLE: if (start) begin
          n       <= len;
          sum     <= '0;
          ssq     <= '0;
          iss     <= '0;
          ret     <= '0;
          issuing <= 1'b1;
          state   <= S_P1;
        end
        S_P1: if (rd_valid) begin
          sum <= sum + SUMW'(rd_data);
          ret <= ret + 1'b1;
          if (ret == n - 1'b1) begin
            logic signed [SUMW-1:0] s;
            logic        [SUMW:0]   mag;
            s = sum + SUMW'(rd_data);
            mag = (s < 0) ? -(SUMW+1)'(s) : (SUMW+1)'(s);
            div_num   <= DIVW'(mag);
            div_den   <= DIVW'(n);
            div_start <= 1'b1;
            state     <= S_MEAN;
          end
        end
        S_MEAN: if (div_done) begin
          mean    <= sum < 0 ? -(DW+1)'(div_quo) : (DW+1)'(div_quo);
          iss     <= '0;
          ret     <= '0;
          issuing <= 1'b1;
          state   <= S_P2;
        end
        S_P2: if (rd_valid) begin
          ssq <= ssq + SSQW'(dev_sq);
          ret <= ret + 1'b1;
          if (ret == n - 1'b1) begin
            div_num   <= DIVW'(ssq + SSQW'(dev_sq));
            div_den   <= DIVW'(n);
            div_start <= 1'b1;
            state     <= S_VAR;
          end
        end
        S_VAR: if (div_done) begin
          sq_x     <= (div_quo >= DIVW'(64'h1_0000_0000)) ? '1 : SQW'(div_quo);
          sq_start <= 1'b1;
          state    <= S_SQRT;
        end
        S_SQRT: if (sq_done) begin
          div_num   <= DIVW'(1) << (2 * FRAC);
          div_den   <= DIVW'((sq_root == 0) ? (SQW/2)'(1) : sq_root);
          div_start <= 1'b1;
          state     <= S_INV;
        end
        S_INV: if (div_done) begin
          inv     <= div_quo;
          iss     <= '0;
          ret     <= '0;
          issuing <= 1'b1;
          state   <= S_P3;
        end
        S_P3: if (rd_valid) begin
          wr_en  <= 1'b1;
          wr_idx <= ret;
          if (yr > (DW+2+DIVW)'((1 << (DW-1)) - 1))   wr_data <= {1'b0, {(DW-1){1'b1}}};
          else if (yr < -(DW+2+DIVW)'(1 << (DW-1))) wr_data <= {1'b1, {(DW-1){1'b0}}};
          else                                      wr_data <= DW'(yr);
          ret <= ret + 1'b1;
          if (ret == n - 1'b1) state <= S_DONE;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
