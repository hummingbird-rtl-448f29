// tb_ring_accumulator: three row groups of 4 rows over 5 column blocks, streamed
// without gaps; each row's total must come out once, in row order, one cycle after
// its last block.
module tb_ring_accumulator;
  localparam int PIPE = 4, NB = 5, NG = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_first, in_last, out_valid;
  logic signed [47:0] in_data, out_data;
  longint exp_q[$];
  longint tot [PIPE];
  int checks = 0, failures = 0, outs = 0;
  ring_accumulator dut (.*);
  always @(negedge clk) if (rst_n && out_valid) begin
    checks++; outs++;
    if (exp_q.size() == 0 || out_data !== 48'(exp_q[0])) begin
      failures++; $display("got %0d exp %0d", out_data, exp_q.size() ? exp_q[0] : 0);
    end
    if (exp_q.size()) void'(exp_q.pop_front());
  end
  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int g = 0; g < NG; g++) begin
      for (int b = 0; b < NB; b++)
        for (int r = 0; r < PIPE; r++) begin
          in_valid = 1; in_first = (b == 0); in_last = (b == NB - 1);
          in_data = 48'(signed'(32'($urandom)));
          if (b == 0) tot[r] = 0;
          tot[r] += longint'(in_data);
          if (b == NB - 1) exp_q.push_back(tot[r]);
          @(negedge clk);
        end
    end
    in_valid = 0; repeat (4) @(negedge clk);
    checks++; if (outs != NG * PIPE) begin failures++; $display("outputs %0d", outs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
