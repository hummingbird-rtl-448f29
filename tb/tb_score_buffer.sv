// tb_score_buffer: writes random scores for 4 heads x 64 tokens in random order,
// then replays each head (random backpressure) and checks value and order.
`timescale 1ns/1ps
module tb_score_buffer;
  localparam int T = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_valid = 0; logic [1:0] wr_head = '0; logic [5:0] wr_tok = '0; logic signed [23:0] wr_data = '0;
  logic rd_start = 0; logic [1:0] rd_head = '0; logic [6:0] rd_n = '0;
  logic rd_valid, rd_ready = 0; logic signed [23:0] rd_data;
  score_buffer #(.TOKENS(T), .GROUP(4)) dut (.*);
  int checks = 0, failures = 0;
  logic signed [23:0] s [4][T];
  int order [256];

  initial begin #2_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  always @(negedge clk) rd_ready = ($urandom % 3) != 0;

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 256; i++) order[i] = i;
    order.shuffle();
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); wr_valid = 1; wr_head = 2'(order[i] / T); wr_tok = 6'(order[i] % T);
      wr_data = 24'($urandom); s[order[i] / T][order[i] % T] = wr_data;
    end
    @(negedge clk); wr_valid = 0;
    for (int h = 3; h >= 0; h--) begin
      int n; n = (h == 2) ? 17 : T;
      @(negedge clk); rd_start = 1; rd_head = 2'(h); rd_n = 7'(n); @(negedge clk); rd_start = 0;
      for (int t = 0; t < n; ) begin
        @(posedge clk);
        if (rd_valid && rd_ready) begin
          checks++; if (rd_data !== s[h][t]) begin failures++; $display("FAIL head %0d tok %0d", h, t); end
          t++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
