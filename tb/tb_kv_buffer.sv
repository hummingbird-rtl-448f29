// tb_kv_buffer: fills 40 rows from the 512-bit bus (two words per row, with gaps),
// overwrites one row through the row port, then replays rows under random
// backpressure and checks every lane; a second fill restarts at row 0.
`timescale 1ns/1ps
module tb_kv_buffer;
  import hb_pkg::*;
  localparam int T = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic fill_start = 0, bus_valid = 0, bus_ready; logic [511:0] bus_data = '0;
  logic row_we = 0; logic [5:0] row_addr = '0; logic [1023:0] row_data = '0;
  logic rd_start = 0; logic [6:0] rd_n = '0; logic rd_valid, rd_ready = 0;
  logic signed [7:0] rd_lane [128];
  kv_buffer #(.TOKENS(T), .HEAD_DIM(128)) dut (.*);
  int checks = 0, failures = 0;
  logic [1023:0] rows [T];

  initial begin #2_000_000; $display("watchdog: timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  always @(negedge clk) rd_ready = ($urandom % 3) != 0;

  task automatic fill(input int n);
    @(negedge clk); fill_start = 1; @(negedge clk); fill_start = 0;
    for (int t = 0; t < n; t++) begin
      rows[t] = {32{$urandom}};
      for (int h = 0; h < 2; h++) begin
        while (($urandom % 3) == 0) @(negedge clk);
        bus_valid = 1; bus_data = rows[t][512*h +: 512]; @(negedge clk); bus_valid = 0;
      end
    end
  endtask
  task automatic replay(input int n);
    @(negedge clk); rd_start = 1; rd_n = 7'(n); @(negedge clk); rd_start = 0;
    for (int t = 0; t < n; ) begin
      @(posedge clk);
      if (rd_valid && rd_ready) begin
        int bad; bad = 0;
        for (int l = 0; l < 128; l++) if (rd_lane[l] !== rows[t][8*l +: 8]) bad++;
        checks++; if (bad != 0) begin failures++; $display("FAIL row %0d: %0d lanes", t, bad); end
        t++;
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    fill(40);
    @(negedge clk); row_we = 1; row_addr = 6'd40; row_data = {32{$urandom}}; rows[40] = row_data;
    @(negedge clk); row_we = 0;
    replay(41);
    fill(10);
    replay(10);
    replay(41);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
