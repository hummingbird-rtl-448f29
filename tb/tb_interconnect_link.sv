// tb_interconnect_link: bypass mode passes local values through unchanged; with
// the link enabled every local value is sent on tx and the peer's values (returned
// with a random delay) are added pairwise in element order.
`timescale 1ns/1ps
module tb_interconnect_link;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enable = 0, loc_valid = 0; logic signed [47:0] loc_data = '0;
  logic tx_valid; logic signed [47:0] tx_data;
  logic rx_valid = 0; logic signed [47:0] rx_data = '0;
  logic out_valid; logic signed [47:0] out_data; logic overflow;
  interconnect_link dut (.*);
  int checks = 0, failures = 0;
  logic signed [47:0] expq [$], peerq [$], txq [$];

  initial begin #2_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  always @(posedge clk) if (rst_n) begin
    if (tx_valid) begin txq.push_back(tx_data); end
    if (out_valid) begin
      checks++; if (expq.size() == 0 || out_data !== expq[0]) begin failures++; $display("FAIL output"); end
      if (expq.size() > 0) void'(expq.pop_front());
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 100; i++) begin
      @(negedge clk); loc_valid = ($urandom % 2) != 0; loc_data = 48'(signed'($urandom));
      if (loc_valid) expq.push_back(loc_data);
    end
    @(negedge clk); loc_valid = 0;
    repeat (3) @(negedge clk);
    checks++; if (txq.size() != 0) begin failures++; $display("FAIL tx in bypass"); end
    enable = 1;
    fork
      for (int i = 0; i < 300; i++) begin
        @(negedge clk); loc_valid = ($urandom % 3) != 0; loc_data = 48'(signed'($urandom));
        if (loc_valid) begin
          logic signed [47:0] pv; pv = 48'(signed'($urandom)) <<< 8;
          peerq.push_back(pv); expq.push_back(loc_data + pv);
        end
      end
      for (int i = 0; i < 340; i++) begin
        @(negedge clk);
        rx_valid = (peerq.size() > 0) && (($urandom % 3) != 0);
        if (rx_valid) rx_data = peerq.pop_front();
      end
    join
    @(negedge clk); loc_valid = 0; rx_valid = 0;
    while (peerq.size() > 0) begin @(negedge clk); rx_valid = 1; rx_data = peerq.pop_front(); end
    @(negedge clk); rx_valid = 0;
    repeat (5) @(negedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL %0d sums missing", expq.size()); end
    checks++; if (overflow) begin failures++; $display("FAIL overflow"); end
    checks++; if (txq.size() == 0) begin failures++; $display("FAIL nothing sent"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
