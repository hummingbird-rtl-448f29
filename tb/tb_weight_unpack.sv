// tb_weight_unpack: random 512-bit words through both modes with random output
// backpressure. 4-bit mode: every word gives one vector of 128 sign-extended
// nibbles. 8-bit mode: two words give one vector (lanes 0..63 from the first word,
// 64..127 from the second). Each output handshake is compared with the model.
`timescale 1ns/1ps
module tb_weight_unpack;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w8 = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [511:0] in_data = '0;
  logic signed [7:0] out_lane [128];
  weight_unpack dut (.*);
  int checks = 0, failures = 0;
  logic [511:0] sent [$];

  initial begin #2_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  // consumer
  int got = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [511:0] a, b;
    int bad;
    bad = 0;
    if (!w8) begin
      a = sent.pop_front();
      for (int l = 0; l < 128; l++) if (out_lane[l] != 8'(signed'(a[4*l +: 4]))) bad++;
    end else begin
      a = sent.pop_front(); b = sent.pop_front();
      for (int l = 0; l < 128; l++)
        if (out_lane[l] != ((l < 64) ? a[8*l +: 8] : b[8*(l-64) +: 8])) bad++;
    end
    checks++; got++;
    if (bad != 0) begin failures++; $display("FAIL vector %0d (w8=%0d): %0d lanes wrong", got, w8, bad); end
  end
  always @(negedge clk) out_ready = ($urandom % 4) != 0;

  task automatic send(input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); in_valid = 1; in_data = {16{$urandom}};
      @(posedge clk); while (!in_ready) @(posedge clk);
      sent.push_back(in_data);
    end
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    send(200);
    repeat (10) @(posedge clk);
    if (got != 200) begin failures++; $display("FAIL 4-bit count %0d", got); end
    checks++;
    w8 = 1;
    send(200);
    repeat (10) @(posedge clk);
    if (got != 300) begin failures++; $display("FAIL 8-bit count %0d", got); end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
