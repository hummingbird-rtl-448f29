// tb_gemv_engine: end-to-end checks of the compute engine against a software model.
//  1. DOT, 12 rows x 256 columns (3 row groups, 2 column blocks), weight stream
//     without gaps: every row checked, and the weight stream must be taken at one
//     vector per cycle once the first block is locked (128 MACs per cycle).
//  2. The same kind of DOT with random gaps in the weight stream.
//  3. AXPY over 5 vectors with biases and direct feedback: all 128 results checked.
//  4. DOT with use_fb over 2 row groups and one column block, whose activations are
//     the fed-back AXPY results.
module tb_gemv_engine;
  import hb_pkg::*;
  localparam int L = 128, NCH = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, cmd_axpy, cmd_use_fb, cmd_use_bias;
  logic [15:0] cmd_ngroups, cmd_ncb, cmd_nvec;
  logic [5:0] cmd_fb_shift;
  logic w_valid, w_ready, act_valid, act_ready, sc_valid, sc_ready, bias_valid, bias_ready;
  logic signed [7:0]  w_data [L];
  logic signed [23:0] act_data [NCH];
  logic signed [23:0] sc_data;
  logic signed [23:0] bias_data [L];
  logic out_valid, axpy_valid, busy;
  logic signed [47:0] out_data;
  logic [1:0] axpy_lane;
  logic signed [47:0] axpy_data [NCH];

  gemv_engine dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // stimulus queues
  typedef logic signed [7:0]  wvec_t [L];
  typedef logic signed [23:0] avec_t [NCH];
  wvec_t wq[$];
  avec_t aq[$];
  logic signed [23:0] sq[$];
  longint exp_q[$];
  int gap_pct = 0;
  int w_stall = 0, w_taken = 0;
  int first_w = -1, last_w = -1;

  always @(negedge clk) begin
    w_valid = (wq.size() > 0) && (($urandom % 100) >= gap_pct);
    if (wq.size() > 0) w_data = wq[0];
    act_valid = aq.size() > 0;
    if (aq.size() > 0) act_data = aq[0];
    sc_valid = sq.size() > 0;
    if (sq.size() > 0) sc_data = sq[0];
  end
  always @(posedge clk) begin
    if (w_valid && w_ready) begin
      void'(wq.pop_front()); w_taken++;
      if (first_w < 0) first_w = cyc;
      last_w = cyc;
    end
    if (act_valid && act_ready) void'(aq.pop_front());
    if (sc_valid && sc_ready) void'(sq.pop_front());
    if (out_valid) begin
      checks++;
      if (exp_q.size() == 0 || out_data !== 48'(exp_q[0])) begin
        failures++; $display("DOT got %0d exp %0d", out_data, exp_q.size() ? exp_q[0] : 0);
      end
      if (exp_q.size()) void'(exp_q.pop_front());
    end
  end

  // DOT test: random matrix, activations x (may be given)
  logic signed [23:0] x [1024];
  logic signed [7:0]  W [64][1024];

  task automatic run_dot(int ng, int ncb, bit fb);
    wvec_t wv; avec_t av;
    for (int r = 0; r < 4 * ng; r++) for (int n = 0; n < 128 * ncb; n++) W[r][n] = 8'($urandom);
    for (int r = 0; r < 4 * ng; r++) begin
      longint e; e = 0;
      for (int n = 0; n < 128 * ncb; n++) e += longint'(W[r][n]) * longint'(x[n]);
      exp_q.push_back(e);
    end
    for (int g = 0; g < ng; g++)
      for (int c = 0; c < ncb; c++) begin
        if (!(fb && c == 0) && !(ncb == 1 && g > 0))
          for (int k = 0; k < 4; k++) begin
            for (int j = 0; j < NCH; j++) av[j] = x[128 * c + 4 * j + 3 - k];
            aq.push_back(av);
          end
        for (int i = 0; i < 4; i++) begin
          for (int l = 0; l < L; l++) wv[l] = W[4 * g + i][128 * c + l];
          wq.push_back(wv);
        end
      end
    cmd_axpy = 0; cmd_ngroups = 16'(ng); cmd_ncb = 16'(ncb); cmd_use_fb = fb; cmd_use_bias = 0;
    cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || wq.size() != 0) begin failures++; $display("DOT left %0d results %0d weights", exp_q.size(), wq.size()); end
  endtask

  longint yax [L];
  initial begin
    cmd_valid = 0; cmd_axpy = 0; cmd_ngroups = 0; cmd_ncb = 0; cmd_nvec = 0; cmd_use_fb = 0;
    cmd_use_bias = 0; cmd_fb_shift = 0; bias_valid = 0;
    for (int l = 0; l < L; l++) bias_data[l] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    foreach (x[n]) x[n] = 24'(signed'(20'($urandom)));
    // 1. full-rate DOT
    gap_pct = 0; w_taken = 0; first_w = -1;
    run_dot(3, 2, 0);
    checks++;
    if (last_w - first_w + 1 != w_taken) begin failures++; $display("DOT not at full rate: %0d vectors in %0d cycles", w_taken, last_w - first_w + 1); end
    // 2. DOT with gaps
    gap_pct = 40;
    run_dot(2, 3, 0);
    gap_pct = 0;
    // 3. AXPY with bias and feedback
    begin
      wvec_t wv;
      for (int l = 0; l < L; l++) begin bias_data[l] = 24'(signed'(16'($urandom))); yax[l] = bias_data[l]; end
      for (int i = 0; i < 5; i++) begin
        logic signed [23:0] s;
        s = 24'(signed'(12'($urandom)));
        sq.push_back(s);
        for (int l = 0; l < L; l++) begin wv[l] = 8'($urandom); yax[l] += longint'(s) * wv[l]; end
        wq.push_back(wv);
      end
      cmd_axpy = 1; cmd_nvec = 5; cmd_use_fb = 1; cmd_use_bias = 1; bias_valid = 1; cmd_valid = 1;
      do @(posedge clk); while (!cmd_ready);
      #1 cmd_valid = 0; bias_valid = 0;
      while (!axpy_valid) @(negedge clk);
      while (axpy_valid) begin
        for (int j = 0; j < NCH; j++) begin
          checks++;
          if (axpy_data[j] !== 48'(yax[4 * j + axpy_lane])) begin
            failures++; $display("AXPY lane %0d got %0d exp %0d", 4 * j + axpy_lane, axpy_data[j], yax[4 * j + axpy_lane]);
          end
        end
        @(negedge clk);
      end
    end
    // 4. DOT on the fed-back values (shift 0, all within 24 bits)
    for (int n = 0; n < 128; n++) x[n] = 24'(yax[n]);
    run_dot(2, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
