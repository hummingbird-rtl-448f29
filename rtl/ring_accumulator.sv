// ring_accumulator: accumulates the reduction-tree output of a DOT GEMV over its
// column blocks, for PIPE rows at a time.
//
// A MAC chain reuses each locked activation for PIPE consecutive rows, so the tree
// delivers row r0, r1, .., r(PIPE-1) of one column block, then the same rows for the
// next column block. The accumulator is a ring of PIPE registers with one adder at
// its entry: every valid input is added to the partial sum that has just come
// round the ring (or to zero on the first column block, in_first) and pushed back
// in. On the last column block (in_last) the sum is also presented at out_data with
// out_valid one cycle later. Inputs of one row group must be valid in consecutive
// cycles, PIPE per column block, as the engine produces them. PIPE = 4 is the
// reference value; the zero-start/last flags are this implementation's interface.
module ring_accumulator #(
  parameter int PIPE = 4,
  parameter int W    = 48
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                in_first,
  input  logic                in_last,
  input  logic signed [W-1:0] in_data,
  output logic                out_valid,
  output logic signed [W-1:0] out_data
);
  logic signed [W-1:0] ring [PIPE];
  logic signed [W-1:0] sum;

  assign sum = (in_first ? '0 : ring[PIPE-1]) + in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < PIPE; i++) ring[i] <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        ring[0] <= sum;
        for (int i = 1; i < PIPE; i++) ring[i] <= ring[i-1];
        if (in_last) out_data <= sum;
      end
    end
  end

endmodule
