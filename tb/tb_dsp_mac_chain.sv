// tb_dsp_mac_chain: self-checking test of one MAC chain.
// Part 1 streams DOT groups back to back (4 activations locked for 4 rows) and
// checks every row's dot product and its LEN+1 cycle latency. Part 2 runs an AXPY
// with biases, offloads it and checks the lanes come out as LEN-1 .. 0. Part 3
// feeds the offloaded AXPY results back into the activation cascade (shift 0) and
// checks a DOT row computed with them.
module tb_dsp_mac_chain;
  import hb_pkg::*;
  localparam int LEN = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic signed [23:0] act_in, d_in;
  logic act_shift, act_lock, fb_sel, ad_load, c_load, offload;
  logic [5:0] fb_shift;
  chain_op_t op;
  logic signed [7:0] w_in [LEN];
  logic signed [47:0] c_in, p_out;
  logic [2:0] c_idx;
  logic dot_valid;
  int checks = 0, failures = 0;

  dsp_mac_chain #(.LEN(LEN)) dut (.*);

  longint exp_q[$];
  int     exp_t[$];
  int     cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // collect DOT results
  always @(negedge clk) if (rst_n && dot_valid) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected DOT output"); end
    else begin
      longint e;
      int t;
      e = exp_q.pop_front();
      t = exp_t.pop_front();
      if (p_out !== 48'(e) || cyc != t + LEN + 1) begin
        failures++; $display("DOT mismatch got %0d exp %0d at cyc %0d (row cyc %0d)", p_out, e, cyc, t);
      end
    end
  end

  task automatic idle();
    act_in = 0; act_shift = 1; act_lock = 0; fb_sel = 0; op = OP_IDLE; ad_load = 0;
    d_in = 0; c_load = 0; offload = 0; c_idx = 0; c_in = 0;
    for (int k = 0; k < LEN; k++) w_in[k] = 0;
  endtask

  localparam int G = 6;
  logic signed [23:0] x [G][LEN];
  logic signed [7:0]  w [G][4][LEN];
  longint acc [LEN];
  logic signed [47:0] bias [LEN];
  logic signed [23:0] s [5];
  logic signed [7:0]  v [5][LEN];
  logic signed [47:0] got [LEN];

  initial begin
    idle(); fb_shift = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (x[g, k]) x[g][k] = 24'($urandom);
    foreach (w[g, r, k]) w[g][r][k] = 8'($urandom);
    // ---- part 1: DOT groups back to back
    for (int t = 0; t < 4 * G + 12; t++) begin
      idle();
      // activations of group g enter at cycles 4g..4g+3 in order x3..x0
      if (t < 4 * G) act_in = x[t / 4][3 - t % 4];
      if (t >= 4 && t % 4 == 0 && t / 4 <= G) act_lock = 1;
      if (t >= 5 && (t - 5) / 4 < G) begin
        int g, r;
        longint e;
        g = (t - 5) / 4; r = (t - 5) % 4; e = 0;
        op = OP_DOT; ad_load = (r == 0);
        for (int k = 0; k < LEN; k++) begin
          w_in[k] = w[g][r][k];
          e += longint'(x[g][k]) * longint'(w[g][r][k]);
        end
        exp_q.push_back(e); exp_t.push_back(cyc);
      end
      @(negedge clk);
    end
    checks++; if (exp_q.size() != 0) begin failures++; $display("missing DOT outputs"); end
    // ---- part 2: AXPY with bias and offload
    idle();
    for (int k = 0; k < LEN; k++) begin bias[k] = 48'(signed'(24'($urandom))); acc[k] = bias[k]; end
    for (int i = 0; i < 5; i++) begin
      s[i] = 24'($urandom % 4096) - 24'd2048;
      for (int k = 0; k < LEN; k++) begin v[i][k] = 8'($urandom); acc[k] += longint'(s[i]) * v[i][k]; end
    end
    for (int k = 0; k < LEN; k++) begin idle(); c_in = bias[k]; c_load = 1; c_idx = 3'(k); @(negedge clk); end
    for (int i = 0; i < 5; i++) begin
      idle(); op = (i == 0) ? OP_AXPY_FIRST : OP_AXPY_ACC; d_in = s[i];
      for (int k = 0; k < LEN; k++) w_in[k] = v[i][k];
      @(negedge clk);
    end
    idle(); repeat (LEN + 1) @(negedge clk);
    for (int j = 0; j < LEN; j++) begin
      idle(); offload = 1; fb_sel = 1;
      got[LEN-1-j] = p_out;
      @(negedge clk);
    end
    for (int k = 0; k < LEN; k++) begin
      checks++;
      if (got[k] !== 48'(acc[k])) begin failures++; $display("AXPY lane %0d got %0d exp %0d", k, got[k], acc[k]); end
    end
    // ---- part 3: the fed-back lanes act as DOT activations
    idle(); act_shift = 0; act_lock = 1; @(negedge clk);
    idle(); act_shift = 0; op = OP_DOT; ad_load = 1;
    begin
      longint e;
      e = 0;
      for (int k = 0; k < LEN; k++) begin
        w_in[k] = 8'($urandom);
        e += longint'(signed'(acc[k] > 64'sd8388607 ? 24'sh7fffff : acc[k] < -64'sd8388608 ? 24'sh800000 : 24'(acc[k]))) * w_in[k];
      end
      exp_q.push_back(e); exp_t.push_back(cyc);
    end
    @(negedge clk);
    idle(); repeat (LEN + 3) @(negedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("missing feedback DOT output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
