// tb_spu_quant: random FP16 values and quantisation scales against
// round-to-nearest of the real product, saturated to 24 bits or (kv8) 8 bits.
`timescale 1ns/1ps
module tb_spu_quant;
  import hb_pkg::*, fp16_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0; fp16_t in_data = '0, in_qscale = '0; logic kv8 = 0;
  logic out_valid; logic signed [23:0] out_data;
  spu_quant dut (.*);
  int checks = 0, failures = 0;
  function automatic real h2r(input logic [15:0] a);
    real m; int e;
    e = int'(a[14:10]);
    if (e == 0) return 0.0;
    m = (1.0 + real'(a[9:0]) / 1024.0) * (2.0 ** (e - 15));
    return a[15] ? -m : m;
  endfunction
  function automatic logic [15:0] rnd_h(input int emin, input int emax);
    return {1'($urandom), 5'(emin + 15 + int'($urandom % (emax - emin + 1))), 10'($urandom)};
  endfunction
  function automatic real absr(input real x); return (x < 0) ? -x : x; endfunction
  real expq [$]; bit k8q [$];
  initial begin #2_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      real e, lim; int g; bit k8, ok;
      e = expq.pop_front(); k8 = k8q.pop_front(); g = int'(out_data);
      lim = k8 ? 127.0 : 8388607.0;
      if (e > lim) ok = (g == int'(lim));
      else if (e < -lim - 1.0) ok = (g == -int'(lim)) || (g == -int'(lim) - 1);
      else ok = absr(real'(g) - e) <= 0.5001;
      checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL kv8=%0d expected %g got %0d", k8, e, g); end
    end
    if (in_valid) begin expq.push_back(h2r(in_data) * h2r(in_qscale)); k8q.push_back(kv8); end
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      in_data = rnd_h(-10, 10); in_qscale = rnd_h(-4, 14); in_qscale[15] = 1'b0;
      kv8 = (i >= 2000);
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
