// spu: scalar processing unit. Element-wise FP16 post-processing between GEMVs.
//
// GEMV path (VPU results, one 48-bit value per cycle):
//   Convert (acc * scale -> FP16)  ->  post operation  ->  Quant  ->  (idx, INT24)
// The post operation is chosen per GEMV (post):
//   POST_NONE     pass the FP16 value on;
//   POST_SILU     SiLU;
//   POST_ROPE     rotary embedding of one head of HD elements: elements 0..HD/2-1
//                 are held, each element i >= HD/2 is rotated together with element
//                 i-HD/2 using the (cos, sin) pair presented on the parameter stream
//                 (cs_valid/cs_cos/cs_sin, one pair per rotated pair). The first
//                 element of each pair leaves at once; the second ones are held and
//                 leave after the last pair, so a head's rotation ends HD/2 cycles
//                 after its last element arrived;
//   POST_SOFTMAX  online softmax over n values (the scores of one head against n
//                 tokens); the normalised outputs leave after the last score.
// Norm path: RMSNorm of n FP16 values from the embedding buffer (or any FP16
// stream) with gains from the parameter stream, then Quant.
// Outputs carry the element index (out_idx) because RoPE and the two-pass units
// reorder or delay them. Quant saturates to 8 bits when kv8 is set (new k/v cache
// entries). Configuration inputs must stay constant while busy. The routing of the
// sub-units and the per-operation configuration are this implementation's design;
// the reference design lists the SPU's functions only.
module spu
  import hb_pkg::*, fp16_pkg::*;
#(
  parameter int HD    = 128,
  parameter int DEPTH = 4096
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration
  input  logic [1:0]              post,        // 0 none, 1 silu, 2 rope, 3 softmax
  input  fp16_t                   scale,
  input  fp16_t                   qscale,
  input  logic                    kv8,
  input  logic [$clog2(DEPTH):0]  n,
  input  logic                    start,       // begin a GEMV post-process (resets idx)
  // VPU results
  input  logic                    acc_valid,
  input  logic signed [ACC_W-1:0] acc_data,
  // parameter stream: (cos, sin) for RoPE, gains for RMSNorm
  input  logic                    cs_valid,
  output logic                    cs_ready,
  input  fp16_t                   cs_cos,
  input  fp16_t                   cs_sin,
  // norm path
  input  logic                    norm_start,
  input  logic                    emb_valid,
  output logic                    emb_ready,
  input  fp16_t                   emb_data,
  // output
  output logic                    out_valid,
  output logic [$clog2(DEPTH)-1:0] out_idx,
  output logic signed [ACT_W-1:0] out_data,
  output logic                    busy
);
  localparam int IW = $clog2(DEPTH);
  localparam logic [1:0] POST_NONE = 2'd0, POST_SILU = 2'd1, POST_ROPE = 2'd2, POST_SOFTMAX = 2'd3;

  // ---------------- Convert
  logic  cv_v;
  fp16_t cv_d;
  logic [IW-1:0] in_idx, cv_idx;
  spu_convert u_conv (.clk, .rst_n, .in_valid(acc_valid), .in_acc(acc_data), .in_scale(scale),
                      .out_valid(cv_v), .out_data(cv_d));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin in_idx <= '0; cv_idx <= '0; end
    else begin
      if (start) in_idx <= '0;
      else if (acc_valid) in_idx <= in_idx + 1'b1;
      if (acc_valid) cv_idx <= in_idx;
    end
  end

  // ---------------- SiLU
  logic  si_v;
  fp16_t si_d;
  logic [IW-1:0] si_i1, si_idx;
  spu_silu u_silu (.clk, .rst_n, .in_valid(cv_v && post == POST_SILU), .in_data(cv_d),
                   .out_valid(si_v), .out_data(si_d));
  always_ff @(posedge clk) begin si_i1 <= cv_idx; si_idx <= si_i1; end

  // ---------------- RoPE with half-head buffering
  localparam int H2 = HD / 2;
  fp16_t   first_half [H2];
  fp16_t   second_out [H2];
  logic    rope_in, ro_v, drain;
  logic    g_rdy;                 // RMSNorm gain request
  logic [$clog2(H2)-1:0] pair_i, drain_i;
  logic [$clog2(H2)-1:0] ro_p1, ro_p2;
  fp16_t   ro_y0, ro_y1;
  logic [$clog2(HD)-1:0] hpos;
  assign hpos    = cv_idx[$clog2(HD)-1:0];
  assign rope_in = cv_v && post == POST_ROPE && hpos >= ($clog2(HD))'(H2);
  assign pair_i  = ($clog2(H2))'(hpos - ($clog2(HD))'(H2));
  // one (cos, sin) pair per rotated pair, or one gain per normalised element
  assign cs_ready = rope_in || (g_rdy && !rope_in);

  spu_rope u_rope (.clk, .rst_n, .in_valid(rope_in && cs_valid),
                   .x0(first_half[pair_i]), .x1(cv_d), .cos_v(cs_cos), .sin_v(cs_sin),
                   .out_valid(ro_v), .y0(ro_y0), .y1(ro_y1));
  logic [IW-1:0] ro_base1, ro_base2, ro_base;
  always_ff @(posedge clk) begin
    if (cv_v && post == POST_ROPE && hpos < ($clog2(HD))'(H2)) first_half[hpos[$clog2(H2)-1:0]] <= cv_d;
    ro_p1 <= pair_i; ro_p2 <= ro_p1;
    ro_base1 <= cv_idx - IW'(hpos); ro_base2 <= ro_base1;
    if (ro_v) second_out[ro_p2] <= ro_y1;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin drain <= 1'b0; drain_i <= '0; ro_base <= '0; end
    else if (ro_v && ro_p2 == ($clog2(H2))'(H2 - 1)) begin drain <= 1'b1; drain_i <= '0; ro_base <= ro_base2; end
    else if (drain) begin
      drain_i <= drain_i + 1'b1;
      if (drain_i == ($clog2(H2))'(H2 - 1)) drain <= 1'b0;
    end
  end

  // ---------------- Softmax
  logic  sm_v, sm_busy;
  fp16_t sm_d;
  logic [IW-1:0] sm_idx;
  spu_softmax #(.DEPTH(DEPTH)) u_smax (.clk, .rst_n, .start(start && post == POST_SOFTMAX), .n(n),
      .in_valid(cv_v && post == POST_SOFTMAX), .in_data(cv_d),
      .out_valid(sm_v), .out_idx(sm_idx), .out_data(sm_d), .busy(sm_busy));

  // ---------------- RMSNorm
  logic  rn_v, rn_busy;
  fp16_t rn_d;
  logic [IW-1:0] rn_idx;
  assign emb_ready = 1'b1;
  spu_rmsnorm #(.DEPTH(DEPTH)) u_rms (.clk, .rst_n, .start(norm_start), .n(n),
      .in_valid(emb_valid), .in_data(emb_data),
      .g_valid(cs_valid && !rope_in), .g_ready(g_rdy), .g_data(cs_cos),
      .out_valid(rn_v), .out_idx(rn_idx), .out_data(rn_d), .busy(rn_busy));

  // ---------------- select into Quant
  logic          q_in_v;
  fp16_t         q_in_d;
  logic [IW-1:0] q_in_i, q_idx;
  always_comb begin
    q_in_v = 1'b0; q_in_d = '0; q_in_i = '0;
    if (rn_v) begin q_in_v = 1'b1; q_in_d = rn_d; q_in_i = rn_idx; end
    else unique case (post)
      POST_NONE:    begin q_in_v = cv_v; q_in_d = cv_d; q_in_i = cv_idx; end
      POST_SILU:    begin q_in_v = si_v; q_in_d = si_d; q_in_i = si_idx; end
      POST_ROPE:    begin
        if (ro_v) begin q_in_v = 1'b1; q_in_d = ro_y0; q_in_i = ro_base2 + IW'(ro_p2); end
        else if (drain) begin q_in_v = 1'b1; q_in_d = second_out[drain_i]; q_in_i = ro_base + IW'(H2) + IW'(drain_i); end
        else if (cv_v && hpos < ($clog2(HD))'(H2)) q_in_v = 1'b0;
      end
      POST_SOFTMAX: begin q_in_v = sm_v; q_in_d = sm_d; q_in_i = sm_idx; end
      default: ;
    endcase
  end

  spu_quant u_quant (.clk, .rst_n, .in_valid(q_in_v), .in_data(q_in_d), .in_qscale(qscale), .kv8(kv8),
                     .out_valid(out_valid), .out_data(out_data));
  always_ff @(posedge clk) q_idx <= q_in_i;
  assign out_idx = q_idx;

  // elements inside the fixed-latency units
  logic [3:0] inflight;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) inflight <= '0;
    else        inflight <= {inflight[2:0], acc_valid};
  assign busy = (|inflight) || cv_v || si_v || ro_v || drain || sm_busy || rn_busy || q_in_v || out_valid;

  // RoPE needs its (cos, sin) pair in the cycle the second element arrives
  a_rope_param: assert property (@(posedge clk) rope_in |-> cs_valid);
endmodule
