// spu_rmsnorm: RMS normalisation y_i = x_i * g_i / sqrt(mean(x^2) + eps), FP16.
//
// Pass 1 takes x_0..x_(n-1), one per cycle, stores them and accumulates x^2 in
// 64-bit fixed point (x in Q.8). Then mean = sum / n (one division), and
// sqrt(mean + eps) is found bit by bit (48 cycles, restoring square root on a
// Q.48 operand, giving a Q.24 root); r = 1 / root is one more division. Pass 2
// reads x back and, for each gain g_i presented on the gain stream (g_valid, which
// paces the pass), emits y_i = (x_i * r) * g_i with out_valid and out_idx, one
// cycle later. eps is 2^-16. The fixed-point formats and the bit-serial root are
// this implementation's choices; the reference design names the operation only.
module spu_rmsnorm
  import fp16_pkg::*;
#(
  parameter int DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [$clog2(DEPTH):0]   n,
  input  logic                     in_valid,
  input  fp16_t                    in_data,
  input  logic                     g_valid,
  output logic                     g_ready,
  input  fp16_t                    g_data,
  output logic                     out_valid,
  output logic [$clog2(DEPTH)-1:0] out_idx,
  output fp16_t                    out_data,
  output logic                     busy
);
  localparam int AW = $clog2(DEPTH);
  typedef enum logic [2:0] {S_IDLE, S_ACC, S_MEAN, S_SQRT, S_INV, S_NORM} st_t;
  st_t st;

  fp16_t        store [DEPTH];
  logic [AW:0]  cnt, total, rd_i;
  logic [63:0]  ss;
  logic [95:0]  rad;            // radicand, Q.48
  logic [47:0]  root;           // Q.24
  logic [95:0]  rem;            // partial remainder (< 2^50, upper bits stay zero)
  logic [5:0]   it;
  logic [47:0]  r;              // 1/root, Q.24
  fp16_t        r16;

  logic signed [47:0] xq;
  assign xq = fp16_to_fix(in_data, 8);

  assign g_ready = (st == S_NORM);

  // one step of the restoring square root
  logic [97:0] cand, trial;
  assign cand  = {rem, rad[95:94]};
  assign trial = {48'd0, root, 2'b01};

  fp16_t x_rd;
  logic  v1;
  logic [AW-1:0] idx1;
  fp16_t g1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cnt <= '0; total <= '0; rd_i <= '0; ss <= '0; rad <= '0; root <= '0;
      rem <= '0; it <= '0; r <= '0; r16 <= '0; v1 <= 1'b0; idx1 <= '0; g1 <= '0;
      out_valid <= 1'b0; out_idx <= '0; out_data <= '0;
    end else begin
      v1 <= 1'b0;
      out_valid <= v1;
      if (v1) begin
        out_idx  <= idx1;
        out_data <= fp16_mul(fp16_mul(x_rd, r16), g1);
      end
      unique case (st)
        S_IDLE: if (start && n != 0) begin st <= S_ACC; cnt <= '0; total <= n; ss <= '0; end
        S_ACC: if (in_valid) begin
          ss  <= ss + 64'(xq * xq);                   // Q.16
          cnt <= cnt + 1'b1;
          if (cnt == total - 1'b1) st <= S_MEAN;
        end
        S_MEAN: begin
          rad  <= {(ss / 64'(total)) + 64'd1, 32'd0}; // Q.48, eps = 2^-16
          root <= '0; rem <= '0; it <= '0;
          st   <= S_SQRT;
        end
        S_SQRT: begin
          if (cand >= trial) begin rem <= 96'(cand - trial); root <= {root[46:0], 1'b1}; end
          else begin rem <= 96'(cand); root <= {root[46:0], 1'b0}; end
          rad <= {rad[93:0], 2'b00};
          it  <= it + 1'b1;
          if (it == 6'd47) st <= S_INV;
        end
        S_INV: begin
          r   <= 48'((64'd1 << 48) / 64'(root));
          st  <= S_NORM;
          rd_i <= '0;
        end
        S_NORM: begin
          r16 <= fp16_pack(1'b0, 64'(r), -24);
          if (g_valid) begin
            v1   <= 1'b1;
            idx1 <= rd_i[AW-1:0];
            g1   <= g_data;
            rd_i <= rd_i + 1'b1;
            if (rd_i == total - 1'b1) st <= S_IDLE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st == S_ACC && in_valid) store[cnt[AW-1:0]] <= in_data;
    x_rd <= store[rd_i[AW-1:0]];
  end

  assign busy = (st != S_IDLE) || v1 || out_valid;
endmodule
