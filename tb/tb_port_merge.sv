// tb_port_merge: four producers with independent random valid send numbered
// beats; the consumer (random ready) must receive {p3, p2, p1, p0} words with the
// same sequence number from every port, in order, and no FIFO may overflow.
`timescale 1ns/1ps
module tb_port_merge;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid [4]; logic in_ready [4]; logic [127:0] in_data [4];
  logic out_valid, out_ready = 0; logic [511:0] out_data;
  port_merge dut (.*);
  int checks = 0, failures = 0;
  int seq [4];
  int outn = 0;
  localparam int N = 500;

  initial begin #2_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  initial for (int p = 0; p < 4; p++) begin in_valid[p] = 0; in_data[p] = '0; seq[p] = 0; end

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 4; p++) if (in_valid[p] && in_ready[p]) seq[p]++;
    if (out_valid && out_ready) begin
      int bad; bad = 0;
      for (int p = 0; p < 4; p++) if (out_data[128*p +: 128] !== {32'(p), 32'(outn), 64'hfeed_0000_0000_0000 + 64'(outn)}) bad++;
      checks++; if (bad != 0) begin failures++; $display("FAIL word %0d", outn); end
      outn++;
    end
  end
  always @(negedge clk) if (rst_n) begin
    out_ready = ($urandom % 3) != 0;
    for (int p = 0; p < 4; p++) begin
      in_valid[p] = (seq[p] < N) && (($urandom % 4) != 0);
      in_data[p]  = {32'(p), 32'(seq[p]), 64'hfeed_0000_0000_0000 + 64'(seq[p])};
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    while (outn < N) @(posedge clk);
    repeat (10) @(posedge clk);
    checks++; if (out_valid) begin failures++; $display("FAIL extra output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
