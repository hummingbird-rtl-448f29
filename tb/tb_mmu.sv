// tb_mmu: the MMU against a four-port AXI DRAM model (random R gaps). Reads to the
// VPU stream (random start, lengths spanning up to three 16 KB columns, random
// consumer readiness) must deliver the words in logical order; a read into the kv
// buffer followed by a replay must return the rows; a new row written through the
// row port must replay and leave on the write-back stream with its address.
`timescale 1ns/1ps
module tb_mmu;
  import hb_pkg::*;
  localparam int COL = 16384, T = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_valid = 0, rd_ready; xfer_cmd_t rd_cmd = '{default: '0}; logic rd_to_kv = 0;
  logic ar_valid [NPORT]; logic ar_ready [NPORT]; axi_ar_t ar [NPORT];
  logic r_valid [NPORT]; logic r_ready [NPORT]; axi_r_t r [NPORT];
  logic vw_valid, vw_ready = 0; logic [511:0] vw_data;
  logic kv_row_we = 0; logic [5:0] kv_row_addr = '0; logic [1023:0] kv_row_data = '0;
  logic kv_rd_start = 0; logic [6:0] kv_rd_n = '0; logic kv_rd_valid, kv_rd_ready = 0;
  logic signed [7:0] kv_rd_lane [128];
  logic wb_req = 0; logic [31:0] wb_req_addr = '0;
  logic wb_valid; logic [31:0] wb_addr; logic [1023:0] wb_data; logic busy;
  mmu #(.COL_BYTES(COL), .TOKENS(T), .HEAD_DIM(128)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  // DRAM model
  logic [127:0] ddr [longint];
  function automatic logic [127:0] rd16(input longint a);
    return ddr.exists(a >> 4) ? ddr[a >> 4] : 128'd0;
  endfunction
  task automatic put_stream(input longint addr, ref logic [511:0] words [$]);
    longint cur, left, tlen, room, part; int w;
    cur = addr; left = 64 * words.size(); w = 0;
    while (left > 0) begin
      room = COL - (cur % COL); tlen = (left < room) ? left : room; part = tlen / 4;
      for (int i = 0; i < part / 16; i++) begin
        for (int p = 0; p < 4; p++) ddr[(cur + p * part + 16 * i) >> 4] = words[w][128*p +: 128];
        w++;
      end
      cur += tlen; left -= tlen;
    end
  endtask
  typedef struct { longint addr; int beats; } burst_t;
  burst_t bq [NPORT][$];
  int bb [NPORT];
  always_comb for (int p = 0; p < NPORT; p++) ar_ready[p] = 1'b1;
  initial for (int p = 0; p < NPORT; p++) begin r_valid[p] = 0; r[p] = '{default: '0}; bb[p] = 0; end
  always @(posedge clk) for (int p = 0; p < NPORT; p++) begin
    if (rst_n && ar_valid[p] && ar_ready[p]) bq[p].push_back('{addr: longint'(ar[p].addr), beats: int'(ar[p].len) + 1});
    if (!r_valid[p] || r_ready[p]) begin
      if (bq[p].size() > 0 && ($urandom % 5) != 0) begin
        r_valid[p] <= 1'b1; r[p].data <= rd16(bq[p][0].addr + 16 * bb[p]); r[p].last <= (bb[p] == bq[p][0].beats - 1);
        if (bb[p] == bq[p][0].beats - 1) begin bb[p] = 0; void'(bq[p].pop_front()); end else bb[p]++;
      end else r_valid[p] <= 1'b0;
    end
  end

  initial begin #20_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  always @(negedge clk) begin vw_ready = ($urandom % 4) != 0; kv_rd_ready = ($urandom % 3) != 0; end

  task automatic issue(input longint a, input longint btt, input bit kv);
    @(negedge clk); rd_valid = 1; rd_cmd.addr = 32'(a); rd_cmd.btt = 32'(btt); rd_to_kv = kv;
    @(posedge clk); while (!rd_ready) @(posedge clk);
    @(negedge clk); rd_valid = 0;
  endtask

  logic [511:0] ws [$];
  logic [1023:0] rows [T];
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      longint a; int nw, got;
      a = 64 * longint'($urandom % 2048) + 32'h0010_0000 * t;
      nw = (t == 0) ? 256 : 1 + int'($urandom % 700);
      ws = {};
      for (int i = 0; i < nw; i++) ws.push_back({16{$urandom}});
      put_stream(a, ws);
      issue(a, 64 * nw, 1'b0);
      got = 0;
      while (got < nw) begin
        @(posedge clk);
        if (vw_valid && vw_ready) begin check(vw_data === ws[got], $sformatf("read %0d word %0d", t, got)); got++; end
      end
    end
    repeat (20) @(posedge clk);
    check(!busy && !vw_valid, "idle after VPU reads");
    // kv buffer fill from DRAM
    ws = {};
    for (int t = 0; t < 20; t++) begin rows[t] = {32{$urandom}}; ws.push_back(rows[t][511:0]); ws.push_back(rows[t][1023:512]); end
    put_stream(64'h0800_0000, ws);
    issue(64'h0800_0000, 20 * 128, 1'b1);
    @(posedge clk); while (busy) @(posedge clk);
    // new row and write-back
    @(negedge clk); rows[20] = {32{$urandom}}; kv_row_we = 1; kv_row_addr = 6'd20; kv_row_data = rows[20];
    wb_req = 1; wb_req_addr = 32'h0800_0000 + 20 * 128;
    @(negedge clk); kv_row_we = 0; wb_req = 0;
    check(wb_valid && wb_addr == 32'h0800_0000 + 20 * 128 && wb_data === rows[20], "write-back");
    @(negedge clk); kv_rd_start = 1; kv_rd_n = 7'd21; @(negedge clk); kv_rd_start = 0;
    for (int t = 0; t < 21; ) begin
      @(posedge clk);
      if (kv_rd_valid && kv_rd_ready) begin
        int bad; bad = 0;
        for (int l = 0; l < 128; l++) if (kv_rd_lane[l] !== rows[t][8*l +: 8]) bad++;
        check(bad == 0, $sformatf("kv row %0d", t)); t++;
      end
    end
    check(!vw_valid, "kv data must not reach the VPU stream");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
