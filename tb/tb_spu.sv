// tb_spu: the SPU's four GEMV post-processing routes and its norm path, each
// against a real-number reference after the final quantisation (qscale 256, or
// 4096 for softmax): no post operation (convert + quant), RoPE over one 128-element
// head with (cos, sin) pairs from the parameter stream, online softmax over 30
// scores, SiLU, and RMSNorm of 64 embedding values with gains from the parameter
// stream. Checks values (tolerance from the FP16 steps), indices and counts.
`timescale 1ns/1ps
module tb_spu;
  import hb_pkg::*, fp16_pkg::*;
  localparam int D = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] post = '0; fp16_t scale = 16'h2000, qscale = 16'h5C00; logic kv8 = 0;
  logic [12:0] n = '0; logic start = 0;
  logic acc_valid = 0; logic signed [47:0] acc_data = '0;
  logic cs_valid = 0, cs_ready; fp16_t cs_cos = '0, cs_sin = '0;
  logic norm_start = 0, emb_valid = 0, emb_ready; fp16_t emb_data = '0;
  logic out_valid; logic [11:0] out_idx; logic signed [23:0] out_data; logic busy;
  spu #(.HD(128), .DEPTH(D)) dut (.*);
  int checks = 0, failures = 0;
  function automatic real h2r(input logic [15:0] a);
    real m; int e;
    e = int'(a[14:10]);
    if (e == 0) return 0.0;
    m = (1.0 + real'(a[9:0]) / 1024.0) * (2.0 ** (e - 15));
    return a[15] ? -m : m;
  endfunction
  function automatic real absr(input real x); return (x < 0) ? -x : x; endfunction
  real expv [D];
  real tol  [D];
  int  got;
  bit  seen [D];

  initial begin #5_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (seen[out_idx] || absr(real'(out_data) - expv[out_idx]) > tol[out_idx]) begin
      failures++; if (failures < 10) $display("FAIL post %0d idx %0d got %0d expected %g", post, out_idx, out_data, expv[out_idx]);
    end
    seen[out_idx] = 1; got++;
  end

  // parameter stream contents
  fp16_t pc [$], ps [$];
  always @(posedge clk) if (cs_valid && cs_ready) begin void'(pc.pop_front()); void'(ps.pop_front()); end
  always_comb begin
    cs_valid = pc.size() > 0;
    cs_cos = (pc.size() > 0) ? pc[0] : 16'h0;
    cs_sin = (ps.size() > 0) ? ps[0] : 16'h0;
  end

  task automatic finish_run(input int cnt, input string what);
    @(posedge clk);
    while (busy || out_valid) @(posedge clk);
    checks++; if (got != cnt) begin failures++; $display("FAIL %s: %0d outputs of %0d", what, got, cnt); end
    got = 0; for (int i = 0; i < D; i++) seen[i] = 0;
  endtask

  task automatic gemv_run(input int p, input int cnt, input fp16_t qs);
    real x [D];
    real sc, mx, sum;
    post = 2'(p); n = 13'(cnt); qscale = qs; sc = h2r(scale);
    for (int i = 0; i < cnt; i++) begin
      logic signed [47:0] a;
      a = 48'(signed'($urandom % 8192)) - 48'sd4096;
      if (p == 3) a = a * 4;
      x[i] = real'(a) * sc;
    end
    if (p == 2) for (int i = 0; i < 64; i++) begin
      real th; th = real'(i) * 0.1;
      pc.push_back(fp16_from_fix(64'($rtoi($cos(th) * 65536.0)), 16));
      ps.push_back(fp16_from_fix(64'($rtoi($sin(th) * 65536.0)), 16));
    end
    // references
    if (p == 3) begin
      mx = x[0]; for (int i = 1; i < cnt; i++) if (x[i] > mx) mx = x[i];
      sum = 0; for (int i = 0; i < cnt; i++) sum += $exp(x[i] - mx);
    end
    for (int i = 0; i < cnt; i++) begin
      real q; q = h2r(qs);
      case (p)
        0: begin expv[i] = x[i] * q; tol[i] = absr(expv[i]) / 1024.0 + 1.0; end
        1: begin expv[i] = x[i] / (1.0 + $exp(-x[i])) * q; tol[i] = absr(expv[i]) * 0.012 + 0.004 * q + 1.0; end
        2: begin
          int j; real c, s; j = i % 64;
          c = h2r(pc[j]); s = h2r(ps[j]);
          expv[i] = (i < 64) ? (x[i] * c - x[i + 64] * s) * q : (x[i - 64] * s + x[i] * c) * q;
          tol[i] = (absr(x[j]) + absr(x[j + 64])) * q / 256.0 + 1.0;
        end
        default: begin expv[i] = $exp(x[i] - mx) / sum * q; tol[i] = 0.002 * q + 0.02 * absr(expv[i]) + 1.0; end
      endcase
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < cnt; i++) begin
      acc_data = 48'($rtoi(x[i] / sc));
      acc_valid = 1; @(negedge clk);
      acc_valid = 0; if (($urandom % 3) == 0) @(negedge clk);
    end
    finish_run(cnt, $sformatf("post %0d", p));
  endtask

  initial begin
    got = 0; for (int i = 0; i < D; i++) seen[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    gemv_run(0, 40, 16'h5C00);
    gemv_run(1, 40, 16'h5C00);
    gemv_run(2, 128, 16'h5C00);
    gemv_run(3, 30, 16'h6C00);
    checks++; if (pc.size() != 0) begin failures++; $display("FAIL rope left %0d pairs", pc.size()); end
    // RMSNorm path
    begin
      real xe [64]; real ms, q;
      post = 2'd0; n = 13'd64; qscale = 16'h5C00; q = 256.0; ms = 0;
      for (int i = 0; i < 64; i++) begin
        pc.push_back({1'b0, 5'(14 + $urandom % 2), 10'($urandom)}); ps.push_back(16'h0);
      end
      @(negedge clk); norm_start = 1; @(negedge clk); norm_start = 0;
      for (int i = 0; i < 64; i++) begin
        emb_valid = 1; emb_data = {1'($urandom), 5'(13 + $urandom % 4), 10'($urandom)};
        xe[i] = h2r(emb_data); ms += xe[i] * xe[i];
        @(negedge clk);
      end
      emb_valid = 0;
      ms = ms / 64.0 + 2.0 ** -16;
      for (int i = 0; i < 64; i++) begin
        expv[i] = xe[i] * h2r(pc[i]) / $sqrt(ms) * q; tol[i] = absr(expv[i]) * 0.01 + 1.0;
      end
      repeat (60) @(posedge clk);
      finish_run(64, "rmsnorm");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
