// tb_dsp_add_chain6: random six-input sums streamed one per cycle; each must
// appear exactly 3 cycles later.
module tb_dsp_add_chain6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic signed [47:0] psum [6];
  logic signed [47:0] sum;
  longint hist [0:3];
  int checks = 0, failures = 0;
  dsp_add_chain6 dut (.*);
  initial begin
    for (int t = 0; t < 60; t++) begin
      longint e;
      e = 0;
      for (int i = 0; i < 6; i++) begin
        psum[i] = 48'(signed'({$urandom, $urandom}) >>> 20);
        e += longint'(psum[i]);
      end
      hist[3] = hist[2]; hist[2] = hist[1]; hist[1] = hist[0]; hist[0] = e;
      @(posedge clk); #1;
      if (t >= 3) begin
        checks++;
        if (sum !== 48'(hist[2])) begin failures++; $display("t=%0d got %0d exp %0d", t, sum, hist[2]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
