// hummingbird_top: one Hummingbird core running the attention block of one decoder
// layer for one new token, for ngroups grouped-query (GQA) groups.
//
// Structure (reference design Fig. 4): DCU (operation sequencer) -> operation
// decoder (this module) -> MMU (column-aligned reads over four AXI HP ports, on-chip
// kv buffer, kv write-back), VPU (weight unpack, GEMV engine, activation buffer,
// score buffer, inter-core link) and SPU (element-wise FP16 post-processing). The
// embedding buffer receives the token's embedding straight from the host.
//
// Operations (see dcu):
//   NORM   embedding -> RMSNorm (gains on the parameter stream) -> activations x.
//   LOADK  kv buffer <- K cache rows 0..pos-1 of the group (DRAM).
//   KPROJ  k = RoPE(Wk x): 8-bit row written into kv buffer row pos and written back.
//   VPROJ  v = Wv x: 8-bit row held on chip and written back.
//   Q(i)   q_i = RoPE(Wq x), INT24, stored in the activation buffer after x.
//   QK(i)  scores K q_i (weights streamed from the kv buffer, activations q_i locked
//          once) -> online softmax over pos+1 tokens -> score buffer, head i.
//   LOADV  kv buffer <- V cache rows 0..pos-1, then the held v row at row pos.
//   SV(i)  o_i = sum_t s_i[t] v_t (AXPY, scalars from the score buffer, vectors from
//          the kv buffer); the results are fed straight back into the engine.
//   O(i)   partial output Wo[:, head] o_i (DOT using the fed-back o_i), optionally
//          all-reduced with other cores over the link, -> SPU -> o_* port.
// Every operation is issued once the previous one has drained (no overlap between
// consecutive operations; the order is the reference design's GQA order).
//
// DRAM layout (byte addresses; all regions read through the MMU):
//   wq_base + h*64*HIDDEN      Wq rows of query head h, 4-bit, engine stream order
//   wk_base/wv_base + g*64*HIDDEN   Wk/Wv rows of kv head g
//   wo_base + h*64*HIDDEN      Wo columns of head h (HIDDEN rows x 128), 4-bit
//   kc_base/vc_base + g*128*TOKENS + 128*t   k/v row of token t, 8-bit
// Each stream is a sequence of 512-bit words; the MMU maps word i of a column
// transaction to the four ports as described in cmd_split/port_merge.
// New kv rows leave on wb_valid/wb_addr/wb_data (1024 bits, logical row address).
//
// Parameter stream (prm_*): HIDDEN RMSNorm gains (prm_cos), then for every RoPE
// operation (KPROJ and each Q(i)) 64 (cos, sin) pairs, in operation order.
// Scales: scl_* dequantise engine results to FP16, qs_* quantise FP16 to integers
// (all FP16). Configuration inputs must be stable from start to done.
// Interface timing: start is a one-cycle pulse while idle; done pulses once after
// the last operation. o_* carries one INT24 value per cycle with its head and row.
module hummingbird_top
  import hb_pkg::*, fp16_pkg::*;
#(
  parameter int HIDDEN    = 4096,
  parameter int TOKENS    = 4096,
  parameter int GROUP     = 4,
  parameter int MAXGRP    = 8,
  parameter int ACT_DEPTH = 14336,
  parameter int COL_BYTES = 16384
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // control and configuration
  input  logic                       start,
  input  logic [$clog2(MAXGRP):0]    cfg_ngroups,
  input  logic [$clog2(TOKENS)-1:0]  cfg_pos,        // tokens already in the cache
  input  logic [ADDR_W-1:0]          wq_base, wk_base, wv_base, wo_base, kc_base, vc_base,
  input  fp16_t                      scl_q, scl_k, scl_v, scl_qk, scl_o,
  input  fp16_t                      qs_act, qs_kv, qs_score,
  input  logic [5:0]                 fb_shift,
  input  logic                       link_en,
  output logic                       done,
  output logic                       busy,
  // embedding from the host
  input  logic                       emb_valid,
  output logic                       emb_ready,
  input  logic [HP_W-1:0]            emb_data,
  // parameter stream
  input  logic                       prm_valid,
  output logic                       prm_ready,
  input  fp16_t                      prm_cos,
  input  fp16_t                      prm_sin,
  // DRAM read ports
  output logic                       ar_valid [NPORT],
  input  logic                       ar_ready [NPORT],
  output axi_ar_t                    ar       [NPORT],
  input  logic                       r_valid  [NPORT],
  output logic                       r_ready  [NPORT],
  input  axi_r_t                     r        [NPORT],
  // kv write-back
  output logic                       wb_valid,
  output logic [ADDR_W-1:0]          wb_addr,
  output logic [LANES*8-1:0]         wb_data,
  // attention output (per head partial O projection)
  output logic                       o_valid,
  output logic [$clog2(GROUP*MAXGRP)-1:0] o_head,
  output logic [$clog2(HIDDEN)-1:0]  o_idx,
  output logic signed [ACT_W-1:0]    o_data,
  // inter-core link
  output logic                       tx_valid,
  output logic signed [ACC_W-1:0]    tx_data,
  input  logic                       rx_valid,
  input  logic signed [ACC_W-1:0]    rx_data,
  output logic                       link_overflow
);
  localparam int HD     = LANES;                       // head dimension
  localparam int NCB    = HIDDEN / HD;                 // column blocks of x
  localparam int SDEPTH = (TOKENS > HIDDEN) ? TOKENS : HIDDEN;
  localparam int SIW    = $clog2(SDEPTH);
  localparam int TW     = $clog2(TOKENS);
  localparam int HW     = $clog2(GROUP);
  localparam int GW     = $clog2(MAXGRP);
  localparam int AIW    = $clog2(ACT_DEPTH);
  localparam logic [ADDR_W-1:0] WBYTES = ADDR_W'(HIDDEN * HD / 2);   // one head's 4-bit weights
  localparam logic [ADDR_W-1:0] KVSTRIDE = ADDR_W'(TOKENS * HD);

  // ---------------- DCU
  logic     op_valid, op_ready, op_done;
  op_kind_t op_kind;
  logic [HW-1:0] op_head;
  logic [GW-1:0] op_group;
  logic     dcu_busy;
  dcu #(.GROUP(GROUP), .MAXGRP(MAXGRP)) u_dcu (
    .clk, .rst_n, .start, .ngroups(cfg_ngroups),
    .op_valid, .op_ready, .op_kind, .op_head, .op_group, .op_done,
    .done, .busy(dcu_busy));

  // ---------------- operation decoder
  typedef enum logic [2:0] {X_IDLE, X_LAUNCH, X_ISSUE, X_RUN, X_FIN} xst_t;
  xst_t     xs;
  op_kind_t kind;
  logic [HW-1:0] head;
  logic [GW-1:0] grp;
  logic     rd_pend, eng_pend;
  logic [3:0] quiet;
  logic [SIW:0] spu_cnt;

  // derived per-operation settings (stable while the operation runs)
  logic [TW:0]         ntok;            // tokens attended: pos + 1
  logic [TW:0]         ngrp_tok;        // ceil(ntok / 4)
  logic [ADDR_W-1:0]   ghead;           // global query head index
  logic                uses_spu, uses_eng, uses_rd, eng_axpy, eng_fb, src_kv;
  logic [15:0]         eng_ngroups, eng_ncb, eng_nvec;
  logic [ADDR_W-1:0]   rd_addr, rd_btt;
  logic                rd_kv;
  logic [1:0]          post;
  fp16_t               scale, qscale;
  logic                kv8;
  logic [SIW:0]        spu_n;

  assign ntok     = (TW+1)'(cfg_pos) + 1'b1;
  assign ngrp_tok = (ntok + (TW+1)'(3)) >> 2;
  assign ghead    = ADDR_W'(grp) * ADDR_W'(GROUP) + ADDR_W'(head);

  always_comb begin
    uses_spu = 1'b0; uses_eng = 1'b0; uses_rd = 1'b0; eng_axpy = 1'b0; eng_fb = 1'b0;
    src_kv = 1'b0; eng_ngroups = '0; eng_ncb = 16'd1; eng_nvec = '0;
    rd_addr = '0; rd_btt = '0; rd_kv = 1'b0;
    post = 2'd0; scale = scl_q; qscale = qs_act; kv8 = 1'b0; spu_n = '0;
    unique case (kind)
      OPK_NORM: begin uses_spu = 1'b1; spu_n = (SIW+1)'(HIDDEN); end
      OPK_LOADK, OPK_LOADV: begin
        uses_rd = (cfg_pos != 0); rd_kv = 1'b1;
        rd_addr = ((kind == OPK_LOADK) ? kc_base : vc_base) + ADDR_W'(grp) * KVSTRIDE;
        rd_btt  = ADDR_W'(cfg_pos) * ADDR_W'(HD);
      end
      OPK_KPROJ, OPK_VPROJ, OPK_Q: begin
        uses_spu = 1'b1; uses_eng = 1'b1; uses_rd = 1'b1;
        eng_ngroups = 16'(HD / CHAIN_LEN); eng_ncb = 16'(NCB);
        rd_btt = WBYTES; spu_n = (SIW+1)'(HD);
        if (kind == OPK_Q) begin
          rd_addr = wq_base + ghead * WBYTES; post = 2'd2; scale = scl_q;
        end else begin
          rd_addr = ((kind == OPK_KPROJ) ? wk_base : wv_base) + ADDR_W'(grp) * WBYTES;
          post = (kind == OPK_KPROJ) ? 2'd2 : 2'd0;
          scale = (kind == OPK_KPROJ) ? scl_k : scl_v; qscale = qs_kv; kv8 = 1'b1;
        end
      end
      OPK_QK: begin
        uses_spu = 1'b1; uses_eng = 1'b1; src_kv = 1'b1;
        eng_ngroups = 16'(ngrp_tok); eng_ncb = 16'd1;
        post = 2'd3; scale = scl_qk; qscale = qs_score; spu_n = (SIW+1)'(ntok);
      end
      OPK_SV: begin
        uses_eng = 1'b1; src_kv = 1'b1; eng_axpy = 1'b1; eng_fb = 1'b1; eng_nvec = 16'(ntok);
      end
      OPK_O: begin
        uses_spu = 1'b1; uses_eng = 1'b1; uses_rd = 1'b1; eng_fb = 1'b1;
        eng_ngroups = 16'(HIDDEN / CHAIN_LEN); eng_ncb = 16'd1;
        rd_addr = wo_base + ghead * WBYTES; rd_btt = WBYTES;
        scale = scl_o; spu_n = (SIW+1)'(HIDDEN);
      end
      default: ;
    endcase
  end

  logic launch;
  assign launch   = (xs == X_LAUNCH);
  assign op_ready = (xs == X_IDLE);

  logic mmu_rd_valid, mmu_rd_ready, eng_cmd_valid, eng_cmd_ready;
  assign mmu_rd_valid  = (xs == X_ISSUE) && rd_pend;
  assign eng_cmd_valid = (xs == X_ISSUE) && eng_pend;

  logic dp_busy, mmu_busy, eng_busy, spu_busy, ab_busy;
  assign dp_busy = mmu_busy || eng_busy || spu_busy || ab_busy;

  logic spu_out_valid;
  logic [LANES*8-1:0] row_q, vrow;
  logic row_we, wb_req;
  logic [ADDR_W-1:0] wb_req_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs <= X_IDLE; kind <= OPK_NORM; head <= '0; grp <= '0;
      rd_pend <= 1'b0; eng_pend <= 1'b0; quiet <= '0; spu_cnt <= '0;
    end else begin
      unique case (xs)
        X_IDLE: if (op_valid) begin
          kind <= op_kind; head <= op_head; grp <= op_group; xs <= X_LAUNCH;
        end
        X_LAUNCH: begin
          rd_pend <= uses_rd; eng_pend <= uses_eng; spu_cnt <= '0; quiet <= '0;
          xs <= X_ISSUE;
        end
        X_ISSUE: begin
          if (mmu_rd_valid && mmu_rd_ready) rd_pend <= 1'b0;
          if (eng_cmd_valid && eng_cmd_ready) eng_pend <= 1'b0;
          if (!(rd_pend && !(mmu_rd_valid && mmu_rd_ready)) &&
              !(eng_pend && !(eng_cmd_valid && eng_cmd_ready))) xs <= X_RUN;
        end
        X_RUN: begin
          // finished when the SPU produced all its outputs (if used) and the datapath
          // has been idle for a few cycles
          quiet <= dp_busy ? 4'd0 : ((quiet == 4'd15) ? quiet : quiet + 1'b1);
          if (quiet >= 4'd4 && (!uses_spu || spu_cnt == spu_n)) xs <= X_FIN;
        end
        X_FIN: xs <= X_IDLE;
        default: xs <= X_IDLE;
      endcase
      if (spu_out_valid && xs == X_RUN) spu_cnt <= spu_cnt + 1'b1;
    end
  end
  assign op_done = (xs == X_FIN);
  assign busy    = dcu_busy;

  // ---------------- MMU
  logic vw_valid, vw_ready;
  logic [BUS_W-1:0] vw_data;
  logic kv_rd_valid, kv_rd_ready;
  logic signed [7:0] kv_rd_lane [LANES];
  logic kv_rd_start;
  logic [TW:0] kv_rd_n;
  logic [TW-1:0] kv_row_addr;
  xfer_cmd_t mmu_cmd;
  assign mmu_cmd.addr = rd_addr;
  assign mmu_cmd.btt  = rd_btt;
  assign kv_rd_start  = launch && src_kv;
  assign kv_rd_n      = (kind == OPK_QK) ? (ngrp_tok << 2) : ntok;

  mmu #(.COL_BYTES(COL_BYTES), .TOKENS(TOKENS), .HEAD_DIM(HD)) u_mmu (
    .clk, .rst_n,
    .rd_valid(mmu_rd_valid), .rd_ready(mmu_rd_ready), .rd_cmd(mmu_cmd), .rd_to_kv(rd_kv),
    .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .vw_valid, .vw_ready, .vw_data,
    .kv_row_we(row_we), .kv_row_addr, .kv_row_data(row_q),
    .kv_rd_start, .kv_rd_n, .kv_rd_valid, .kv_rd_ready, .kv_rd_lane,
    .wb_req, .wb_req_addr, .wb_valid, .wb_addr, .wb_data, .busy(mmu_busy));

  // ---------------- VPU: weight source
  logic up_valid, up_ready;
  logic signed [7:0] up_lane [LANES];
  weight_unpack u_unpack (.clk, .rst_n, .w8(1'b0),
    .in_valid(vw_valid), .in_ready(vw_ready), .in_data(vw_data),
    .out_valid(up_valid), .out_ready(up_ready), .out_lane(up_lane));

  logic w_valid, w_ready;
  logic signed [WGT_W-1:0] w_data [LANES];
  always_comb for (int l = 0; l < LANES; l++) w_data[l] = src_kv ? kv_rd_lane[l] : up_lane[l];
  assign w_valid     = src_kv ? kv_rd_valid : up_valid;
  assign up_ready    = !src_kv && w_ready;
  assign kv_rd_ready = src_kv && w_ready;

  // ---------------- VPU: activation buffer and score buffer
  logic act_valid, act_ready;
  logic signed [ACT_W-1:0] act_data [NCHAIN];
  logic ab_sc_valid, ab_sc_unused;
  logic signed [ACT_W-1:0] ab_sc_data;
  logic spu_out_v_act;
  logic [AIW-1:0] ab_wr_idx;
  logic [SIW-1:0] spu_out_idx;
  logic signed [ACT_W-1:0] spu_out_data;
  logic [15:0] dot_base;
  assign dot_base = (kind == OPK_QK) ? 16'(4 * (NCB + int'(head))) : 16'd0;
  assign spu_out_v_act = spu_out_valid && (kind == OPK_NORM || kind == OPK_Q);
  assign ab_wr_idx = (kind == OPK_Q) ? AIW'(HIDDEN + HD * int'(head)) + AIW'(spu_out_idx)
                                     : AIW'(spu_out_idx);

  activation_buffer #(.DEPTH(ACT_DEPTH)) u_abuf (
    .clk, .rst_n, .wr_valid(spu_out_v_act), .wr_idx(ab_wr_idx), .wr_data(spu_out_data),
    .dot_start(launch && uses_eng && !eng_axpy && !eng_fb), .dot_ncb(eng_ncb),
    .dot_ngroups(eng_ngroups), .dot_base,
    .act_valid, .act_ready, .act_data,
    .sc_start(1'b0), .sc_base('0), .sc_n('0), .sc_valid(ab_sc_valid), .sc_ready(1'b0),
    .sc_data(ab_sc_data), .busy(ab_busy));
  assign ab_sc_unused = ab_sc_valid ^ (^ab_sc_data);

  logic sc_valid, sc_ready;
  logic signed [ACT_W-1:0] sc_data;
  score_buffer #(.TOKENS(TOKENS), .GROUP(GROUP)) u_sbuf (
    .clk, .rst_n,
    .wr_valid(spu_out_valid && kind == OPK_QK), .wr_head(head), .wr_tok(TW'(spu_out_idx)),
    .wr_data(spu_out_data),
    .rd_start(launch && kind == OPK_SV), .rd_head(head), .rd_n(ntok),
    .rd_valid(sc_valid), .rd_ready(sc_ready), .rd_data(sc_data));

  // ---------------- VPU: GEMV engine
  logic eng_out_valid, axpy_valid, bias_ready_unused;
  logic signed [ACC_W-1:0] eng_out_data;
  logic [$clog2(CHAIN_LEN)-1:0] axpy_lane;
  logic signed [ACC_W-1:0] axpy_data [NCHAIN];
  logic signed [ACT_W-1:0] bias_zero [LANES];
  always_comb for (int l = 0; l < LANES; l++) bias_zero[l] = '0;

  gemv_engine u_eng (
    .clk, .rst_n,
    .cmd_valid(eng_cmd_valid), .cmd_ready(eng_cmd_ready), .cmd_axpy(eng_axpy),
    .cmd_ngroups(eng_ngroups), .cmd_ncb(eng_ncb), .cmd_nvec(eng_nvec),
    .cmd_use_fb(eng_fb), .cmd_fb_shift(fb_shift), .cmd_use_bias(1'b0),
    .w_valid, .w_ready, .w_data,
    .act_valid, .act_ready, .act_data,
    .sc_valid, .sc_ready, .sc_data,
    .bias_valid(1'b0), .bias_ready(bias_ready_unused), .bias_data(bias_zero),
    .out_valid(eng_out_valid), .out_data(eng_out_data),
    .axpy_valid, .axpy_lane, .axpy_data, .busy(eng_busy));

  // ---------------- inter-core link (all-reduce of the O projection partial sums)
  logic red_valid;
  logic signed [ACC_W-1:0] red_data;
  interconnect_link u_link (
    .clk, .rst_n, .enable(link_en && kind == OPK_O),
    .loc_valid(eng_out_valid), .loc_data(eng_out_data),
    .tx_valid, .tx_data, .rx_valid, .rx_data,
    .out_valid(red_valid), .out_data(red_data), .overflow(link_overflow));

  // ---------------- embedding buffer and SPU
  logic eb_valid, eb_ready;
  logic [FP_W-1:0] eb_data;
  logic [$clog2(HIDDEN):0] eb_level, emb_taken;
  embedding_buffer #(.DEPTH(HIDDEN)) u_emb (
    .clk, .rst_n, .wr_valid(emb_valid), .wr_ready(emb_ready), .wr_data(emb_data),
    .rd_valid(eb_valid), .rd_ready(eb_ready), .rd_data(eb_data), .level(eb_level));

  logic norm_feed, spu_emb_ready;
  // the norm operation takes exactly HIDDEN elements from the embedding buffer
  assign norm_feed = (kind == OPK_NORM) && (xs == X_RUN) && (emb_taken != ($clog2(HIDDEN)+1)'(HIDDEN));
  assign eb_ready  = norm_feed && spu_emb_ready;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) emb_taken <= '0;
    else if (launch) emb_taken <= '0;
    else if (eb_valid && eb_ready) emb_taken <= emb_taken + 1'b1;

  logic [$clog2(HIDDEN):0] eb_level_unused;
  assign eb_level_unused = eb_level;

  spu #(.HD(HD), .DEPTH(SDEPTH)) u_spu (
    .clk, .rst_n, .post, .scale, .qscale, .kv8, .n(spu_n),
    .start(launch && uses_spu && kind != OPK_NORM),
    .acc_valid(red_valid), .acc_data(red_data),
    .cs_valid(prm_valid), .cs_ready(prm_ready), .cs_cos(prm_cos), .cs_sin(prm_sin),
    .norm_start(launch && kind == OPK_NORM),
    .emb_valid(eb_valid && norm_feed), .emb_ready(spu_emb_ready), .emb_data(eb_data),
    .out_valid(spu_out_valid), .out_idx(spu_out_idx), .out_data(spu_out_data),
    .busy(spu_busy));

  // ---------------- new k / v rows
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) row_q <= '0;
    else if (spu_out_valid && (kind == OPK_KPROJ || kind == OPK_VPROJ))
      row_q[8*int'(spu_out_idx[$clog2(HD)-1:0]) +: 8] <= spu_out_data[7:0];
    else if (xs == X_FIN && kind == OPK_VPROJ) row_q <= row_q;
    else if (launch && kind == OPK_LOADV) row_q <= vrow;
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vrow <= '0;
    else if (xs == X_FIN && kind == OPK_VPROJ) vrow <= row_q;

  // k row into the kv buffer after KPROJ, v row after the V cache load
  assign row_we      = (xs == X_FIN) && (kind == OPK_KPROJ || kind == OPK_LOADV);
  assign kv_row_addr = cfg_pos;
  assign wb_req      = (xs == X_FIN) && (kind == OPK_KPROJ || kind == OPK_VPROJ);
  assign wb_req_addr = ((kind == OPK_KPROJ) ? kc_base : vc_base) + ADDR_W'(grp) * KVSTRIDE
                       + ADDR_W'(cfg_pos) * ADDR_W'(HD);

  // ---------------- attention output
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin o_valid <= 1'b0; o_head <= '0; o_idx <= '0; o_data <= '0; end
    else begin
      o_valid <= spu_out_valid && kind == OPK_O;
      o_head  <= ($clog2(GROUP*MAXGRP))'(ghead);
      o_idx   <= ($clog2(HIDDEN))'(spu_out_idx);
      o_data  <= spu_out_data;
    end
  end

  logic axpy_unused;
  always_comb begin
    axpy_unused = axpy_valid ^ (^axpy_lane);
    for (int j = 0; j < NCHAIN; j++) axpy_unused ^= axpy_data[j][0];
  end
endmodule
