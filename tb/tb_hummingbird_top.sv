// tb_hummingbird_top: end-to-end test of one core at full size (default
// parameters: hidden 4096, 4096-token cache, 4 query heads per kv head), running
// one GQA group's attention for a new token at position 5.
//
// A behavioural DRAM with four AXI read slaves (random gaps on R) holds the
// weights and the kv cache, laid out through the same column split the MMU uses.
// Stimulus is chosen so results can be predicted: the embedding is constant, so
// RMSNorm gives x = 16 everywhere; Wk/Wv/Wq are zero except the first 8 columns,
// so k, v and q are small exact integers (RoPE with cos = 1, sin = 0); all V cache
// rows equal the new v, so whatever the softmax scores are, s*V ~= v; Wo picks
// lane r mod 128, and the link partner returns the same partial sums, so
// o[r] ~= 2 * 16 * v[r mod 128].
// Checks: the two write-back rows (exact), every O output (tolerance for score
// rounding), the output count, and one counter per mechanism (column split over
// all ports, kv buffer fill and replay, RMSNorm, RoPE, softmax, AXPY with
// feedback, all-reduce, write-back); a mechanism that never happened is a failure.
`timescale 1ns/1ps
module tb_hummingbird_top;
  import hb_pkg::*, fp16_pkg::*;
  localparam int HIDDEN = 4096, TOKENS = 4096, GROUP = 4, MAXGRP = 8;
  localparam int POS = 5;
  localparam int COL = 16384;
  localparam int NCB = HIDDEN / 128;
  localparam logic [31:0] WQ = 32'h0100_0000, WK = 32'h0200_0000, WV = 32'h0300_0000,
                          WO = 32'h0400_0000, KC = 32'h0800_0000, VC = 32'h0C00_0000;

  logic clk = 0, rst_n = 0;
  always #1.667 clk = ~clk;

  logic start = 0;
  logic done, busy;
  logic emb_valid = 0, emb_ready;
  logic [127:0] emb_data = '0;
  logic prm_valid, prm_ready;
  fp16_t prm_cos, prm_sin;
  logic ar_valid [NPORT]; logic ar_ready [NPORT]; axi_ar_t ar [NPORT];
  logic r_valid [NPORT]; logic r_ready [NPORT]; axi_r_t r [NPORT];
  logic wb_valid; logic [31:0] wb_addr; logic [1023:0] wb_data;
  logic o_valid; logic [4:0] o_head; logic [11:0] o_idx; logic signed [23:0] o_data;
  logic tx_valid; logic signed [47:0] tx_data;
  logic rx_valid; logic signed [47:0] rx_data;
  logic link_overflow;

  hummingbird_top dut (
    .clk, .rst_n, .start, .cfg_ngroups(4'd1), .cfg_pos(12'(POS)),
    .wq_base(WQ), .wk_base(WK), .wv_base(WV), .wo_base(WO), .kc_base(KC), .vc_base(VC),
    .scl_q(16'h2C00), .scl_k(16'h2C00), .scl_v(16'h2C00), .scl_qk(16'h0C00), .scl_o(16'h3C00),
    .qs_act(16'h4C00), .qs_kv(16'h3C00), .qs_score(16'h6C00), .fb_shift(6'd12), .link_en(1'b1),
    .done, .busy, .emb_valid, .emb_ready, .emb_data,
    .prm_valid, .prm_ready, .prm_cos, .prm_sin,
    .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .wb_valid, .wb_addr, .wb_data, .o_valid, .o_head, .o_idx, .o_data,
    .tx_valid, .tx_data, .rx_valid, .rx_data, .link_overflow);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  // ---------------- DRAM model
  logic [127:0] ddr [longint];
  function automatic logic [127:0] rd16(input longint a);
    return ddr.exists(a >> 4) ? ddr[a >> 4] : 128'd0;
  endfunction
  // place a stream of 512-bit words read by one command at addr, as the MMU splits it
  task automatic put_stream(input logic [31:0] addr, ref logic [511:0] words [$]);
    longint cur, left, tlen, room, part;
    int w;
    cur = addr; left = 64 * words.size(); w = 0;
    while (left > 0) begin
      room = COL - (cur % COL);
      tlen = (left < room) ? left : room;
      part = tlen / 4;
      for (int i = 0; i < part / 16; i++) begin
        for (int p = 0; p < 4; p++) ddr[(cur + p * part + 16 * i) >> 4] = words[w][128*p +: 128];
        w++;
      end
      cur += tlen; left -= tlen;
    end
  endtask

  // AXI read slaves
  typedef struct { longint addr; int beats; } burst_t;
  burst_t bq [NPORT][$];
  int     bb [NPORT];
  int     ar_count [NPORT];
  always_comb for (int p = 0; p < NPORT; p++) ar_ready[p] = 1'b1;
  initial for (int p = 0; p < NPORT; p++) begin r_valid[p] = 0; r[p] = '{default: '0}; bb[p] = 0; ar_count[p] = 0; end
  always @(posedge clk) begin
    for (int p = 0; p < NPORT; p++) begin
      if (rst_n && ar_valid[p] && ar_ready[p]) begin
        bq[p].push_back('{addr: longint'(ar[p].addr), beats: int'(ar[p].len) + 1});
        ar_count[p]++;
      end
      if (!r_valid[p] || r_ready[p]) begin
        if (bq[p].size() > 0 && ($urandom % 8) != 0) begin
          r_valid[p] <= 1'b1;
          r[p].data  <= rd16(bq[p][0].addr + 16 * bb[p]);
          r[p].last  <= (bb[p] == bq[p][0].beats - 1);
          if (bb[p] == bq[p][0].beats - 1) begin bb[p] = 0; void'(bq[p].pop_front()); end
          else bb[p]++;
        end else r_valid[p] <= 1'b0;
      end
    end
  end

  // ---------------- link partner: returns this core's partial sums one cycle later,
  // at the same rate (a peer core running in lock step)
  logic signed [47:0] lq [$];
  always @(posedge clk) begin
    if (rst_n && tx_valid) lq.push_back(tx_data);
    if (lq.size() > 0) begin rx_valid <= 1'b1; rx_data <= lq.pop_front(); end
    else rx_valid <= 1'b0;
  end
  initial begin rx_valid = 0; rx_data = '0; end

  // ---------------- parameter stream: gains then (cos, sin) pairs
  int prm_left;
  assign prm_valid = (prm_left > 0);
  always_comb begin prm_cos = 16'h3C00; prm_sin = 16'h0000; end
  always @(posedge clk) if (rst_n && prm_valid && prm_ready) prm_left <= prm_left - 1;

  // ---------------- model values
  function automatic int vval(int l); return 8 * ((l % 7) - 3); endfunction
  function automatic int kval(int l); return 8 * ((l % 5) - 2); endfunction
  logic signed [7:0] kc [POS][128];

  // weights: rows x 4096 columns, nonzero only in the first 8 columns
  task automatic put_proj(input logic [31:0] base, input int kind);   // 0 k, 1 v, 2 q
    logic [511:0] ws [$];
    logic [511:0] w;
    int val;
    ws = {};
    for (int g = 0; g < 32; g++) for (int c = 0; c < NCB; c++) for (int i = 0; i < 4; i++) begin
      w = '0;
      if (c == 0) for (int l = 0; l < 8; l++) begin
        val = (kind == 0) ? (((4*g+i) % 5) - 2) : (kind == 1) ? (((4*g+i) % 7) - 3) : (((4*g+i) % 3) - 1);
        w[4*l +: 4] = 4'(val);
      end
      ws.push_back(w);
    end
    put_stream(base, ws);
  endtask
  task automatic put_wo(input logic [31:0] base);
    logic [511:0] ws [$];
    logic [511:0] w;
    ws = {};
    for (int g = 0; g < HIDDEN / 4; g++) for (int i = 0; i < 4; i++) begin
      w = '0;
      w[4*((4*g+i) % 128) +: 4] = 4'd1;
      ws.push_back(w);
    end
    put_stream(base, ws);
  endtask
  task automatic put_cache(input logic [31:0] base, input bit is_v);
    logic [511:0] ws [$];
    logic [1023:0] row;
    ws = {};
    for (int t = 0; t < POS; t++) begin
      for (int l = 0; l < 128; l++) begin
        if (is_v) row[8*l +: 8] = 8'(vval(l));
        else begin kc[t][l] = 8'(signed'(4'($urandom))); row[8*l +: 8] = kc[t][l]; end
      end
      ws.push_back(row[511:0]); ws.push_back(row[1023:512]);
    end
    put_stream(base, ws);
  endtask

  // ---------------- mechanism counters
  int m_wb, m_out, m_kvfill, m_kvreplay, m_rms, m_rope, m_smax, m_axpy, m_fbdot, m_link, m_q;
  initial begin m_wb = 0; m_out = 0; m_kvfill = 0; m_kvreplay = 0; m_rms = 0; m_rope = 0;
                m_smax = 0; m_axpy = 0; m_fbdot = 0; m_link = 0; m_q = 0; end
  always @(posedge clk) if (rst_n) begin
    if (dut.u_mmu.m_valid && dut.u_mmu.to_kv) m_kvfill++;
    if (dut.kv_rd_valid && dut.kv_rd_ready) m_kvreplay++;
    if (dut.u_spu.rn_v) m_rms++;
    if (dut.u_spu.ro_v) m_rope++;
    if (dut.u_spu.sm_v) m_smax++;
    if (dut.u_eng.axpy_valid) m_axpy++;
    if (dut.eng_cmd_valid && dut.eng_cmd_ready && dut.eng_fb && !dut.eng_axpy) m_fbdot++;
    if (rx_valid) m_link++;
    if (dut.spu_out_v_act && dut.kind == OPK_Q) m_q++;
  end

  // write-back rows
  always @(posedge clk) if (rst_n && wb_valid) begin
    int ok;
    m_wb++;
    ok = 1;
    if (wb_addr == KC + 32'(128 * POS)) begin
      for (int l = 0; l < 128; l++) if ($signed(wb_data[8*l +: 8]) != kval(l)) ok = 0;
      check(ok == 1, "k row");
    end else if (wb_addr == VC + 32'(128 * POS)) begin
      for (int l = 0; l < 128; l++) if ($signed(wb_data[8*l +: 8]) != vval(l)) ok = 0;
      check(ok == 1, "v row");
    end else check(1'b0, $sformatf("write-back address %h", wb_addr));
  end

  // O outputs
  always @(posedge clk) if (rst_n && o_valid) begin
    int e, d;
    m_out++;
    e = 32 * vval(int'(o_idx) % 128);
    d = int'(o_data) - e;
    check(d >= -40 && d <= 8 && o_head < 4,
          $sformatf("o head %0d idx %0d got %0d expect ~%0d", o_head, o_idx, o_data, e));
  end

  initial begin
    #20_000_000;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    prm_left = 0;
    put_proj(WK, 0); put_proj(WV, 1);
    for (int h = 0; h < GROUP; h++) begin
      put_proj(WQ + 32'(h * 64 * HIDDEN), 2);
      put_wo(WO + 32'(h * 64 * HIDDEN));
    end
    put_cache(KC, 1'b0); put_cache(VC, 1'b1);
    repeat (5) @(posedge clk);
    rst_n = 1;
    // embedding: HIDDEN FP16 values of 0.5
    for (int i = 0; i < HIDDEN / 8; i++) begin
      @(negedge clk); emb_valid = 1; emb_data = {8{16'h3800}};
      @(posedge clk); while (!emb_ready) @(posedge clk);
    end
    @(negedge clk); emb_valid = 0;
    prm_left = HIDDEN + 5 * 64;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    @(posedge clk); while (!done) @(posedge clk);
    repeat (20) @(posedge clk);

    check(m_out == GROUP * HIDDEN, $sformatf("output count %0d", m_out));
    check(m_wb == 2, $sformatf("write-backs %0d", m_wb));
    for (int p = 0; p < NPORT; p++) check(ar_count[p] > 0, $sformatf("column split: port %0d unused", p));
    check(m_kvfill == 4 * POS, $sformatf("kv buffer fill words %0d", m_kvfill));
    check(m_kvreplay == GROUP * (4 * ((POS + 4) / 4) + POS + 1), $sformatf("kv replay rows %0d", m_kvreplay));
    check(m_rms == HIDDEN, $sformatf("rmsnorm outputs %0d", m_rms));
    check(m_rope == 5 * 64, $sformatf("rope pairs %0d", m_rope));
    check(m_q == GROUP * 128, $sformatf("q writes %0d", m_q));
    check(m_smax == GROUP * (POS + 1), $sformatf("softmax outputs %0d", m_smax));
    check(m_axpy == GROUP * CHAIN_LEN, $sformatf("axpy offload cycles %0d", m_axpy));
    check(m_fbdot == GROUP, $sformatf("feedback DOTs %0d", m_fbdot));
    check(m_link == GROUP * HIDDEN, $sformatf("all-reduce words %0d", m_link));
    check(!link_overflow, "link overflow");
    check(prm_left == 0, $sformatf("parameter stream left %0d", prm_left));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
