// tb_spu_silu: x * sigmoid(x) for random FP16 x in [-16, 16] against the real
// function, within 0.004 + 1% (the sigmoid is computed in fixed point).
`timescale 1ns/1ps
module tb_spu_silu;
  import fp16_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0; fp16_t in_data = '0;
  logic out_valid; fp16_t out_data;
  spu_silu dut (.*);
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
  real eq [$];
  initial begin #2_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      real e; e = eq.pop_front();
      checks++;
      if (absr(h2r(out_data) - e) > 0.004 + 0.01 * absr(e)) begin
        failures++; if (failures < 10) $display("FAIL got %g expected %g", h2r(out_data), e);
      end
    end
    if (in_valid) begin real x; x = h2r(in_data); eq.push_back(x / (1.0 + $exp(-x))); end
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      in_data = rnd_h(-8, 3);
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
