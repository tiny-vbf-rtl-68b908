// softmax_unit: softmax of one row of attention scores.
//
// p_i = exp(x_i - max) / sum_j exp(x_j - max), in three passes that each
// read the row once, one element per clock:
//   pass 1  max of the row
//   pass 2  e_i = exp(x_i - max), 24-bit, summed; then one division gives
//           the reciprocal R = 2^45 / sum (at most 2^23, as sum >= 2^22)
//   pass 3  e_i is formed again and p_i = e_i * R / 2^35 is written back as
//           a DW-bit activation with FRAC fraction bits (1.0 = 2^FRAC).
// exp(y), y <= 0, is evaluated as 2^(y*log2 e): the integer part of
// y*log2 e becomes a right shift, the fraction f a second-order polynomial
// 2^f ~ 1 + 0.6565 f + 0.3435 f^2 (coefficients 2689/4096 and 1407/4096),
// which is within 0.3 % of 2^f. e_i has 22 fraction bits (1.0 = 2^22).
// The 24-bit width of the softmax datapath is the paper's; the method and
// the polynomial are this design's choices.
//
// Interface and timing: as layer_norm. A row takes about 3*len + 60 cycles.
// A probability never exceeds 1.0 = 2^FRAC, so the top bits of wr_data
// (sign and the bits above 2^FRAC) are always zero; synthesis reports them
// as constant outputs. They are kept so that wr_data has the activation
// format of the memory it is written to.
module softmax_unit #(
  parameter int DW   = 16,
  parameter int FRAC = 10,
  parameter int SW   = 24,
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

  localparam int EF    = SW - 2;          // fraction bits of e (22)
  localparam int DIVW  = 48;
  localparam int RSH   = 2 * EF + 1;      // R = 2^RSH / sum  (45)
  localparam int PSH   = RSH - FRAC;      // p = e*R >> PSH    (35)
  localparam int SUMW  = SW + IW;
  localparam logic [15:0] LOG2E = 16'd23637;  // log2(e) * 2^14
  localparam logic [11:0] C1    = 12'd2689;   // 0.6565 * 2^12
  localparam logic [11:0] C2    = 12'd1407;   // 0.3435 * 2^12

  typedef enum logic [2:0] { S_IDLE, S_P1, S_P2, S_DIV, S_P3, S_DONE } state_t;

  state_t                 state;
  logic [IW-1:0]          n, iss, ret;
  logic                   issuing;
  logic signed [DW-1:0]   mx;
  logic [SUMW-1:0]        sum;
  logic [SW-1:0]          recip;

  logic                   div_start, div_busy, div_done;
  logic [DIVW-1:0]        div_quo;

  divider #(.W(DIVW)) u_div (
    .clk(clk), .rst_n(rst_n), .start(div_start),
    .num(DIVW'(1) << RSH), .den(DIVW'(sum)),
    .busy(div_busy), .done(div_done), .quo(div_quo));

  // exp(rd_data - mx) as an SW-bit unsigned value with EF fraction bits
  logic signed [DW:0]    y;
  logic signed [DW+16:0] t;
  logic signed [DW+16:0] z;
  logic [9:0]            f;
  logic [DW+16:0]        sh;
  logic [EF:0]           mant;
  logic [SW-1:0]         e;
  logic [SW+SW-1:0]      pe;
  logic [SW+SW-1:0]      p;

  always_comb begin
    y    = (DW+1)'(rd_data) - (DW+1)'(mx);
    t    = (DW+17)'(y) * $signed({1'b0, LOG2E});
    z    = t >>> 14;                       // y*log2(e), FRAC fraction bits
    f    = z[FRAC-1:0];
    sh   = (DW+17)'(-(z >>> FRAC));        // -floor(y*log2 e) >= 0
    mant = (EF+1)'((32'd1 << EF) + 32'(f) * 32'(C1) + ((32'(f) * 32'(f) * 32'(C2)) >> FRAC));
    e    = (sh >= (DW+17)'(SW)) ? '0 : SW'(mant >> sh[4:0]);
    pe   = (2*SW)'(e) * (2*SW)'(recip);
    p    = (pe + ((2*SW)'(1) << (PSH - 1))) >> PSH;
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
      iss       <= '0;
      ret       <= '0;
      n         <= '0;
      mx        <= '0;
      sum       <= '0;
      recip     <= '0;
    end else begin
      done      <= 1'b0;
      wr_en     <= 1'b0;
      div_start <= 1'b0;
      if (issuing) begin
        if (iss == n - 1'b1) issuing <= 1'b0;
        iss <= iss + 1'b1;
      end
      unique case (state)
        S_IDLE: if (start) begin
          n       <= len;
          mx      <= {1'b1, {(DW-1){1'b0}}};
          sum     <= '0;
          iss     <= '0;
          ret     <= '0;
          issuing <= 1'b1;
          state   <= S_P1;
        end
        S_P1: if (rd_valid) begin
          if (rd_data > mx) mx <= rd_data;
          ret <= ret + 1'b1;
          if (ret == n - 1'b1) begin
            iss     <= '0;
            ret     <= '0;
            issuing <= 1'b1;
            state   <= S_P2;
          end
        end
        S_P2: if (rd_valid) begin
          sum <= sum + SUMW'(e);
          ret <= ret + 1'b1;
          if (ret == n - 1'b1) state <= S_DIV;
        end
        S_DIV: begin
          // sum is complete in this cycle; start the division once
          if (!div_busy && !div_done && !div_start) div_start <= 1'b1;
          if (div_done) begin
            recip   <= SW'(div_quo);
            iss     <= '0;
            ret     <= '0;
            issuing <= 1'b1;
            state   <= S_P3;
          end
        end
        S_P3: if (rd_valid) begin
          wr_en   <= 1'b1;
          wr_idx  <= ret;
          wr_data <= DW'(p);
          ret     <= ret + 1'b1;
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
