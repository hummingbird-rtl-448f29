// tb_activation_buffer: writes 1024 random INT24 activations by element index,
// then checks the DOT stream (words base..base+4*ncb-1 of every bank, repeated per
// row group, once when ncb = 1) against x[128c + 4j + 3 - k] for chain j, and the
// AXPY scalar stream against x[base + i], both under random backpressure.
`timescale 1ns/1ps
module tb_activation_buffer;
  import hb_pkg::*;
  localparam int DEPTH = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_valid = 0; logic [9:0] wr_idx = '0; logic signed [23:0] wr_data = '0;
  logic dot_start = 0; logic [15:0] dot_ncb = '0, dot_ngroups = '0, dot_base = '0;
  logic act_valid, act_ready = 0; logic signed [23:0] act_data [32];
  logic sc_start = 0; logic [9:0] sc_base = '0; logic [15:0] sc_n = '0;
  logic sc_valid, sc_ready = 0; logic signed [23:0] sc_data;
  logic busy;
  activation_buffer #(.DEPTH(DEPTH)) dut (.*);
  int checks = 0, failures = 0;
  logic signed [23:0] x [DEPTH];

  initial begin #2_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  always @(negedge clk) begin act_ready = ($urandom % 3) != 0; sc_ready = ($urandom % 3) != 0; end

  task automatic run_dot(input int base, input int ncb, input int ng);
    int words, reps, n;
    @(negedge clk); dot_start = 1; dot_base = 16'(base); dot_ncb = 16'(ncb); dot_ngroups = 16'(ng);
    @(negedge clk); dot_start = 0;
    reps = (ncb == 1) ? 1 : ng; words = 4 * ncb; n = 0;
    while (n < reps * words) begin
      @(posedge clk);
      if (act_valid && act_ready) begin
        int w, c, k, bad;
        w = base + n % words; c = w / 4; k = w % 4; bad = 0;
        for (int j = 0; j < 32; j++) if (act_data[j] !== x[128*c + 4*j + 3 - k]) bad++;
        checks++; if (bad != 0) begin failures++; $display("FAIL dot word %0d: %0d chains wrong", n, bad); end
        n++;
      end
    end
    repeat (5) @(posedge clk);
    checks++; if (busy || act_valid) begin failures++; $display("FAIL dot stream did not stop"); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int e = 0; e < DEPTH; e++) begin
      @(negedge clk); wr_valid = 1; wr_idx = 10'(e); wr_data = 24'($urandom); x[e] = wr_data;
    end
    @(negedge clk); wr_valid = 0;
    run_dot(0, 8, 2);
    run_dot(8, 1, 5);
    run_dot(4, 3, 3);
    // scalars
    @(negedge clk); sc_start = 1; sc_base = 10'd37; sc_n = 16'd100;
    @(negedge clk); sc_start = 0;
    for (int i = 0; i < 100; ) begin
      @(posedge clk);
      if (sc_valid && sc_ready) begin
        checks++; if (sc_data !== x[37 + i]) begin failures++; $display("FAIL scalar %0d", i); end
        i++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
