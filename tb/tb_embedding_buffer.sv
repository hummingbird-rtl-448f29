// tb_embedding_buffer: the host side writes 128-bit words (8 FP16 values) until
// the buffer is full, the reader takes single elements with random readiness;
// checks element order, the fill level and the full/empty handshakes.
`timescale 1ns/1ps
module tb_embedding_buffer;
  localparam int D = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_valid = 0, wr_ready; logic [127:0] wr_data = '0;
  logic rd_valid, rd_ready = 0; logic [15:0] rd_data; logic [6:0] level;
  embedding_buffer #(.DEPTH(D)) dut (.*);
  int checks = 0, failures = 0;
  logic [15:0] q [$];
  int wr_n = 0, rd_n = 0;

  initial begin #2_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  always @(posedge clk) if (rst_n) begin
    if (wr_valid && wr_ready) begin for (int e = 0; e < 8; e++) q.push_back(wr_data[16*e +: 16]); wr_n++; end
    if (rd_valid && rd_ready) begin
      checks++; if (q.size() == 0 || rd_data !== q[0]) begin failures++; $display("FAIL element %0d", rd_n); end
      if (q.size() > 0) void'(q.pop_front());
      rd_n++;
    end
  end

  task automatic check_level();
    checks++; if (int'(level) != q.size()) begin failures++; $display("FAIL level %0d vs %0d", level, q.size()); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    // fill completely: the buffer must then refuse
    for (int i = 0; i < D / 8; i++) begin
      @(negedge clk); wr_valid = 1; wr_data = {4{$urandom}};
      @(posedge clk); while (!wr_ready) @(posedge clk);
    end
    @(negedge clk); wr_valid = 0;
    @(negedge clk); check_level();
    checks++; if (wr_ready) begin failures++; $display("FAIL accepts when full"); end
    // mixed traffic
    for (int c = 0; c < 600; c++) begin
      @(negedge clk);
      rd_ready = ($urandom % 2) != 0;
      wr_valid = ($urandom % 6) == 0; wr_data = {4{$urandom}};
      if (c % 50 == 0) begin rd_ready = 0; wr_valid = 0; @(negedge clk); check_level(); end
    end
    @(negedge clk); wr_valid = 0; rd_ready = 1;
    while (rd_valid) @(negedge clk);
    check_level();
    checks++; if (rd_n != 8 * wr_n) begin failures++; $display("FAIL counts %0d %0d", rd_n, wr_n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
