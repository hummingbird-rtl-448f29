// tb_spu_rmsnorm: RMS normalisation of random vectors (n = 1, 16, 200; values in
// [-8, 8], gains in [0.25, 4]) against the real result x*g/sqrt(mean(x^2)+2^-16),
// within 1% + 0.002, with the gain stream paced randomly; checks indices and count.
`timescale 1ns/1ps
module tb_spu_rmsnorm;
  import fp16_pkg::*;
  localparam int D = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0; logic [8:0] n = '0; logic in_valid = 0; fp16_t in_data = '0;
  logic g_valid = 0, g_ready; fp16_t g_data = '0;
  logic out_valid; logic [7:0] out_idx; fp16_t out_data; logic busy;
  spu_rmsnorm #(.DEPTH(D)) dut (.*);
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
  real xs [D], gs [D];
  initial begin #5_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic run(input int cnt);
    real ms, e; int got, gi;
    @(negedge clk); start = 1; n = 9'(cnt); @(negedge clk); start = 0;
    ms = 0;
    for (int i = 0; i < cnt; i++) begin
      @(negedge clk); in_valid = 1; in_data = rnd_h(-7, 2); xs[i] = h2r(in_data); ms += xs[i] * xs[i];
      gs[i] = 0;
    end
    @(negedge clk); in_valid = 0;
    ms = ms / cnt + 2.0 ** -16;
    got = 0; gi = 0;
    while (got < cnt) begin
      @(negedge clk);
      g_valid = (gi < cnt) && (($urandom % 3) != 0);
      g_data = {1'b0, 5'(13 + $urandom % 5), 10'($urandom)};
      @(posedge clk);
      if (g_valid && g_ready) begin gs[gi] = h2r(g_data); gi++; end
      if (out_valid) begin
        e = xs[out_idx] * gs[out_idx] / $sqrt(ms);
        checks++;
        if (int'(out_idx) != got || absr(h2r(out_data) - e) > 0.002 + 0.01 * absr(e)) begin
          failures++; if (failures < 10) $display("FAIL n=%0d idx %0d got %g expected %g", cnt, out_idx, h2r(out_data), e);
        end
        got++;
      end
    end
    @(negedge clk); g_valid = 0;
    repeat (3) @(posedge clk);
    checks++; if (busy) begin failures++; $display("FAIL busy after run"); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    run(1); run(16); run(200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
