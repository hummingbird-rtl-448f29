// spu_softmax: online softmax of one attention head's scores, FP16 in and out.
//
// Pass 1 (MaxExpAcc) takes the n scores x_0..x_(n-1), one per cycle, keeps them
// in a local store, and keeps a running maximum m and a running sum
// d = sum_j e^(x_j - m), both updated in the same cycle (online softmax: when a
// new maximum appears, d is first rescaled by e^(m_old - m_new)). One division then
// forms 1/d. Pass 2 (Norm) reads the scores back and emits
// s_i = e^(x_i - m) / d for i = 0..n-1, one per cycle (out_valid, out_idx).
// Scores are handled in Q.16 fixed point clamped to +-32767, d in Q.16, 1/d in
// Q.24; exponentials come from fp16_pkg. The store is DEPTH scores deep
// (4096 = the longest context). Pass 2 starts by itself two cycles after the last
// score; its results follow with a latency of 2 cycles. The fixed-point number
// formats are this implementation's choices.
module spu_softmax
  import fp16_pkg::*;
#(
  parameter int DEPTH = 4096
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [$clog2(DEPTH):0] n,
  input  logic                   in_valid,
  input  fp16_t                  in_data,
  output logic                   out_valid,
  output logic [$clog2(DEPTH)-1:0] out_idx,
  output fp16_t                  out_data,
  output logic                   busy
);
  localparam int AW = $clog2(DEPTH);
  typedef enum logic [1:0] {S_IDLE, S_ACC, S_DIV, S_NORM} st_t;
  st_t st;

  logic signed [31:0] store [DEPTH];
  logic [AW:0]        cnt, total, rd_i;
  logic signed [31:0] m;
  logic [47:0]        d;
  logic [47:0]        inv_d;      // Q.24

  logic signed [47:0] xw;
  logic signed [31:0] xf;
  always_comb begin
    xw = fp16_to_fix(in_data, 16);
    if (xw > 48'sd2147418112) xf = 32'sd2147418112;
    else if (xw < -48'sd2147418112) xf = -32'sd2147418112;
    else xf = 32'(xw);
  end

  // online update
  logic [47:0] d_next;
  logic signed [31:0] m_next;
  always_comb begin
    if (cnt == 0) begin
      m_next = xf; d_next = 48'd65536;
    end else if (xf > m) begin
      m_next = xf;
      d_next = ((d * 48'(exp_q16(m - xf))) >> 16) + 48'd65536;
    end else begin
      m_next = m;
      d_next = d + 48'(exp_q16(xf - m));
    end
  end

  // pass 2 pipeline
  logic              rd_v, n_v;
  logic [AW-1:0]     rd_idx_q;
  logic signed [31:0] rd_x;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cnt <= '0; total <= '0; rd_i <= '0; m <= '0; d <= '0; inv_d <= '0;
      rd_v <= 1'b0; rd_idx_q <= '0; out_valid <= 1'b0; out_idx <= '0; out_data <= '0;
    end else begin
      rd_v <= 1'b0;
      out_valid <= rd_v;
      unique case (st)
        S_IDLE: if (start && n != 0) begin st <= S_ACC; cnt <= '0; total <= n; end
        S_ACC: if (in_valid) begin
          m <= m_next; d <= d_next;
          cnt <= cnt + 1'b1;
          if (cnt == total - 1'b1) st <= S_DIV;
        end
        S_DIV: begin
          inv_d <= 48'((64'd1 << 40) / 64'(d));
          rd_i <= '0;
          st <= S_NORM;
        end
        S_NORM: begin
          rd_v <= 1'b1;
          rd_idx_q <= rd_i[AW-1:0];
          rd_i <= rd_i + 1'b1;
          if (rd_i == total - 1'b1) st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
      if (rd_v) begin
        out_idx  <= rd_idx_q;
        out_data <= fp16_pack(1'b0, 64'(exp_q16(rd_x - m)) * 64'(inv_d), -40);
      end
    end
  end

  assign n_v = (st == S_ACC) && in_valid;
  always_ff @(posedge clk) begin
    if (n_v) store[cnt[AW-1:0]] <= xf;
    if (st == S_NORM) rd_x <= store[rd_i[AW-1:0]];
  end

  assign busy = (st != S_IDLE) || rd_v || out_valid;
endmodule
