// tb_axi_read_port: random reads (16-byte granular, up to 20 KB, any start) into
// an AXI slave model with random AR/R readiness and gaps. Checks that each burst
// has at most 256 beats and stays inside a 4 KB page, that the bursts of a read
// cover it in order, and that the data stream carries the addressed beats in order.
`timescale 1ns/1ps
module tb_axi_read_port;
  import hb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid = 0, cmd_ready; xfer_cmd_t cmd = '{default: '0};
  logic ar_valid, ar_ready = 0; axi_ar_t ar;
  logic r_valid = 0, r_ready; axi_r_t r = '{default: '0};
  logic data_valid, data_ready = 0; logic [127:0] data; logic busy;
  axi_read_port dut (.*);
  int checks = 0, failures = 0;
  longint exp_beats [$];
  longint next_ar;
  typedef struct { longint addr; int beats; } burst_t;
  burst_t bq [$];
  int bb = 0;

  function automatic logic [127:0] pat(input longint a); return {4{32'(a) ^ 32'h5a5a_0000}}; endfunction

  initial begin #5_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  always @(negedge clk) begin ar_ready = ($urandom % 3) != 0; data_ready = ($urandom % 4) != 0; end

  always @(posedge clk) if (rst_n) begin
    if (ar_valid && ar_ready) begin
      longint a, e;
      a = ar.addr; e = a + 16 * (longint'(ar.len) + 1) - 1;
      checks++;
      if ((a >> 12) != (e >> 12) || a != next_ar) begin
        failures++; $display("FAIL burst %h len %0d (expected start %h)", ar.addr, ar.len, next_ar);
      end
      next_ar = e + 1;
      bq.push_back('{addr: a, beats: int'(ar.len) + 1});
    end
    if (!r_valid || r_ready) begin
      if (bq.size() > 0 && ($urandom % 4) != 0) begin
        r_valid <= 1; r.data <= pat(bq[0].addr + 16 * bb); r.last <= (bb == bq[0].beats - 1);
        if (bb == bq[0].beats - 1) begin bb = 0; void'(bq.pop_front()); end else bb++;
      end else r_valid <= 0;
    end
    if (data_valid && data_ready) begin
      checks++;
      if (exp_beats.size() == 0 || data !== pat(exp_beats[0])) begin failures++; $display("FAIL data beat"); end
      if (exp_beats.size() > 0) void'(exp_beats.pop_front());
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      longint a, n;
      a = 16 * longint'($urandom % 100000); n = 16 * (1 + longint'($urandom % 1280));
      @(negedge clk); cmd_valid = 1; cmd.addr = 32'(a); cmd.btt = 32'(n);
      @(posedge clk); while (!cmd_ready) @(posedge clk);
      next_ar = a;
      for (longint b = 0; b < n; b += 16) exp_beats.push_back(a + b);
      @(negedge clk); cmd_valid = 0;
      @(posedge clk); while (busy) @(posedge clk);
    end
    repeat (20) @(posedge clk);
    checks++; if (exp_beats.size() != 0) begin failures++; $display("FAIL %0d beats missing", exp_beats.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
