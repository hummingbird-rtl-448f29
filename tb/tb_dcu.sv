// tb_dcu: runs the sequencer for 2 and then 1 groups with random operation
// latencies and compares every issued operation (kind, head, group) with the GQA
// order NORM | LOADK KPROJ VPROJ Q0 Q1 QK0 Q2 QK1 Q3 QK2 QK3 LOADV SV0 O0 .. SV3 O3
// per group, then checks done and that nothing more is issued.
`timescale 1ns/1ps
module tb_dcu;
  import hb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0; logic [3:0] ngroups = '0;
  logic op_valid, op_ready = 0; op_kind_t op_kind; logic [1:0] op_head; logic [2:0] op_group;
  logic op_done = 0, done, busy;
  dcu #(.GROUP(4), .MAXGRP(8)) dut (.*);
  int checks = 0, failures = 0;

  typedef struct { op_kind_t k; int h; int g; } op_t;
  op_t expq [$];
  function automatic void add(op_kind_t k, int h, int g); expq.push_back('{k: k, h: h, g: g}); endfunction
  function automatic void build(int ng);
    add(OPK_NORM, 0, 0);
    for (int g = 0; g < ng; g++) begin
      add(OPK_LOADK, 0, g); add(OPK_KPROJ, 0, g); add(OPK_VPROJ, 0, g);
      add(OPK_Q, 0, g); add(OPK_Q, 1, g); add(OPK_QK, 0, g); add(OPK_Q, 2, g); add(OPK_QK, 1, g);
      add(OPK_Q, 3, g); add(OPK_QK, 2, g); add(OPK_QK, 3, g); add(OPK_LOADV, 0, g);
      for (int h = 0; h < 4; h++) begin add(OPK_SV, h, g); add(OPK_O, h, g); end
    end
  endfunction

  initial begin #2_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic run(input int ng);
    int n; n = 0;
    build(ng);
    @(negedge clk); start = 1; ngroups = 4'(ng); @(negedge clk); start = 0;
    while (!done) begin
      @(negedge clk); op_ready = 1;
      @(posedge clk);
      if (op_valid && op_ready) begin
        op_t e;
        checks++;
        e = (expq.size() > 0) ? expq.pop_front() : '{k: OPK_NORM, h: -1, g: -1};
        if (op_kind != e.k || int'(op_head) != e.h || int'(op_group) != e.g) begin
          failures++; $display("FAIL op %0d: got %s h%0d g%0d expected %s h%0d g%0d", n, op_kind.name(), op_head, op_group, e.k.name(), e.h, e.g);
        end
        n++;
        @(negedge clk); op_ready = 0;
        repeat ($urandom % 6) @(negedge clk);
        op_done = 1; @(negedge clk); op_done = 0;
      end
    end
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL %0d operations missing", expq.size()); end
    expq = {};
    repeat (5) @(posedge clk);
    checks++; if (op_valid || busy) begin failures++; $display("FAIL still active after done"); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    run(2);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
