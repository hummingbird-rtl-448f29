// tb_cmd_split: random reads (64-byte granular, up to three columns long, any
// start) with random readiness on the four sub-command outputs. A reference loop
// gives the expected sub-commands per port (each transaction ends at the next
// 16 KB column boundary and is cut into four equal contiguous parts); every
// sub-command taken is compared with it, and the total is checked at the end.
`timescale 1ns/1ps
module tb_cmd_split;
  import hb_pkg::*;
  localparam int COL = 16384;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready; xfer_cmd_t in_cmd = '{default: '0};
  logic sub_valid [4]; logic sub_ready [4]; xfer_cmd_t sub_cmd [4]; logic busy;
  cmd_split #(.COL_BYTES(COL)) dut (.*);
  int checks = 0, failures = 0;
  xfer_cmd_t exp_q [4][$];

  initial begin #5_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  always @(negedge clk) for (int p = 0; p < 4; p++) sub_ready[p] = ($urandom % 3) != 0;
  initial for (int p = 0; p < 4; p++) sub_ready[p] = 0;

  always @(posedge clk) if (rst_n)
    for (int p = 0; p < 4; p++) if (sub_valid[p] && sub_ready[p]) begin
      xfer_cmd_t e;
      checks++;
      if (exp_q[p].size() == 0) begin failures++; $display("FAIL port %0d: unexpected sub-command", p); end
      else begin
        e = exp_q[p].pop_front();
        if (sub_cmd[p] !== e) begin
          failures++; $display("FAIL port %0d: got %h/%0d expected %h/%0d", p, sub_cmd[p].addr, sub_cmd[p].btt, e.addr, e.btt);
        end
      end
    end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      longint a, left, cur, tl, room;
      a = 64 * longint'($urandom % 4096);
      left = 64 * (1 + longint'($urandom % 768));
      if (t == 0) begin a = 0; left = COL; end
      cur = a;
      while (left > 0) begin
        room = COL - cur % COL; tl = (left < room) ? left : room;
        for (int p = 0; p < 4; p++) exp_q[p].push_back('{addr: 32'(cur + p * tl / 4), btt: 32'(tl / 4)});
        cur += tl; left -= tl;
      end
      @(negedge clk); in_valid = 1; in_cmd.addr = 32'(a); in_cmd.btt = 32'(cur - a);
      @(posedge clk); while (!in_ready) @(posedge clk);
      @(negedge clk); in_valid = 0;
    end
    repeat (50) @(posedge clk);
    for (int p = 0; p < 4; p++) begin
      checks++; if (exp_q[p].size() != 0) begin failures++; $display("FAIL port %0d: %0d missing", p, exp_q[p].size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
