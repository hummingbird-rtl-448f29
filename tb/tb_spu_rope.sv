// tb_spu_rope: random pairs rotated by random angles (cos and sin from a real
// angle, rounded to FP16) against the real rotation, within an absolute error of
// 2^-9 of the pair's magnitude. Latency 2, one pair per cycle.
`timescale 1ns/1ps
module tb_spu_rope;
  import fp16_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0; fp16_t x0 = '0, x1 = '0, cos_v = '0, sin_v = '0;
  logic out_valid; fp16_t y0, y1;
  spu_rope dut (.*);
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
  real e0q [$], e1q [$], mq [$];
  initial begin #2_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      real e0, e1, m;
      e0 = e0q.pop_front(); e1 = e1q.pop_front(); m = mq.pop_front();
      checks++;
      if (absr(h2r(y0) - e0) > m / 512.0 || absr(h2r(y1) - e1) > m / 512.0) begin
        failures++; if (failures < 10) $display("FAIL (%g,%g) expected (%g,%g)", h2r(y0), h2r(y1), e0, e1);
      end
    end
    if (in_valid) begin
      real a, b, c, s;
      a = h2r(x0); b = h2r(x1); c = h2r(cos_v); s = h2r(sin_v);
      e0q.push_back(a * c - b * s); e1q.push_back(a * s + b * c);
      mq.push_back(absr(a) + absr(b) + 1e-3);
    end
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      real th;
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      x0 = rnd_h(-6, 6); x1 = rnd_h(-6, 6);
      th = real'($urandom % 6283) / 1000.0;
      cos_v = fp16_from_fix(64'($rtoi($cos(th) * 65536.0)), 16);
      sin_v = fp16_from_fix(64'($rtoi($sin(th) * 65536.0)), 16);
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
