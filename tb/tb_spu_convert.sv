// tb_spu_convert: random 48-bit accumulators times random FP16 scales against a
// real-number reference: results within half an FP16 ulp (relative 2^-11), values
// beyond 65504 saturated, values below 2^-14 flushed to zero. Latency 1.
`timescale 1ns/1ps
module tb_spu_convert;
  import hb_pkg::*, fp16_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0; logic signed [47:0] in_acc = '0; fp16_t in_scale = '0;
  logic out_valid; fp16_t out_data;
  spu_convert dut (.*);
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
  real expq [$];
  initial begin #2_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      real e, g; bit ok;
      e = expq.pop_front(); g = h2r(out_data);
      if (absr(e) >= 65520.0) ok = (absr(g) == 65504.0) && ((g < 0) == (e < 0));
      else if (absr(e) < 6.1e-5) ok = absr(g) <= 6.11e-5;
      else ok = absr(g - e) <= absr(e) * 0.000489;
      checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL expected %g got %g", e, g); end
    end
    if (in_valid) expq.push_back(real'(in_acc) * h2r(in_scale));
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      in_acc = 48'(signed'($urandom)) >>> ($urandom % 31);
      in_scale = rnd_h(-24, 2);
      if (i % 100 == 0) in_acc = 48'sh7fff_ffff_ffff;
      if (i % 100 == 1) in_acc = 0;
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
