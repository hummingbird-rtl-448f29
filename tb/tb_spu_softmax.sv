// tb_spu_softmax: several softmax runs (n from 1 to 300, scores in [-16, 16],
// including an increasing run that rescales the running sum at every step)
// against the real softmax: every output within 0.002 + 2% of the exact value,
// indices in order, and busy until the last output.
`timescale 1ns/1ps
module tb_spu_softmax;
  import fp16_pkg::*;
  localparam int D = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0; logic [9:0] n = '0; logic in_valid = 0; fp16_t in_data = '0;
  logic out_valid; logic [8:0] out_idx; fp16_t out_data; logic busy;
  spu_softmax #(.DEPTH(D)) dut (.*);
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
  real xs [D], p [D];
  initial begin #5_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic run(input int cnt, input int mode);
    real mx, sum; int got;
    @(negedge clk); start = 1; n = 10'(cnt); @(negedge clk); start = 0;
    for (int i = 0; i < cnt; i++) begin
      in_data = (mode == 1) ? fp16_from_fix(64'(i * 4096), 16) : rnd_h(-6, 3);
      xs[i] = h2r(in_data);
      in_valid = ($urandom % 3) != 0;
      if (!in_valid) begin @(negedge clk); in_valid = 1; end
      @(negedge clk); in_valid = 0;
    end
    mx = xs[0]; for (int i = 1; i < cnt; i++) if (xs[i] > mx) mx = xs[i];
    sum = 0; for (int i = 0; i < cnt; i++) sum += $exp(xs[i] - mx);
    for (int i = 0; i < cnt; i++) p[i] = $exp(xs[i] - mx) / sum;
    got = 0;
    while (busy || out_valid) begin
      @(posedge clk);
      if (out_valid) begin
        checks++;
        if (int'(out_idx) != got || absr(h2r(out_data) - p[got]) > 0.002 + 0.02 * p[got]) begin
          failures++; if (failures < 10) $display("FAIL n=%0d idx %0d got %g expected %g", cnt, out_idx, h2r(out_data), p[got]);
        end
        got++;
      end
    end
    checks++; if (got != cnt) begin failures++; $display("FAIL n=%0d: %0d outputs", cnt, got); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    run(1, 0); run(7, 0); run(64, 0); run(300, 0); run(100, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
