// tb_adder_tree: 32 random 40-bit inputs per cycle; the sum must appear after the
// two-level latency of 6 cycles, every cycle.
module tb_adder_tree;
  localparam int N = 32, LAT = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic signed [47:0] in_data [N];
  logic signed [47:0] out_data;
  longint hist [0:LAT];
  int checks = 0, failures = 0;
  adder_tree dut (.*);
  initial begin
    for (int t = 0; t < 80; t++) begin
      longint e;
      e = 0;
      for (int i = 0; i < N; i++) begin
        in_data[i] = 48'(signed'({$urandom, $urandom}) >>> 24);
        e += longint'(in_data[i]);
      end
      for (int d = LAT; d > 0; d--) hist[d] = hist[d-1];
      hist[0] = e;
      @(posedge clk); #1;
      if (t >= LAT) begin
        checks++;
        if (out_data !== 48'(hist[LAT-1])) begin failures++; $display("t=%0d got %0d exp %0d", t, out_data, hist[LAT-1]); end
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
