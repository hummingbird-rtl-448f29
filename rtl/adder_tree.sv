// adder_tree: reduces N partial sums to one sum per cycle with levels of
// six-input DSP adder chains (dsp_add_chain6).
//
// Level l groups the previous level's values six at a time; a group that is not
// full is padded with zeros. With N = 32 (one input per MAC chain) the tree has two
// levels: six chains on the first level (the last one fed only two sums) and one
// on the second. Every level adds the chain latency of 3 cycles, so the result is
// valid 3 * LEVELS cycles after its inputs. Fully pipelined: one new set of
// inputs per cycle. Building the tree from six-input chains follows the reference
// engine; padding the last group with zeros is this implementation's choice.
module adder_tree #(
  parameter int N = 32,
  parameter int W = 48
) (
  input  logic                clk,
  input  logic signed [W-1:0] in_data [N],
  output logic signed [W-1:0] out_data
);
  // number of values after each level
  function automatic int level_count(int n, int l);
    int c = n;
    for (int i = 0; i < l; i++) c = (c + 5) / 6;
    return c;
  endfunction
  function automatic int num_levels(int n);
    int c = n, l = 0;
    while (c > 1) begin c = (c + 5) / 6; l++; end
    return (l == 0) ? 1 : l;
  endfunction

  localparam int LEVELS = num_levels(N);
  localparam int MAXW   = N;

  logic signed [W-1:0] lv [LEVELS+1][MAXW];

  always_comb begin
    for (int i = 0; i < MAXW; i++) lv[0][i] = (i < N) ? in_data[i] : '0;
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    localparam int NIN  = level_count(N, l);
    localparam int NOUT = level_count(N, l + 1) == 0 ? 1 : level_count(N, l + 1);
    for (genvar j = 0; j < NOUT; j++) begin : g_node
      logic signed [W-1:0] ps [6];
      always_comb begin
        for (int i = 0; i < 6; i++) ps[i] = (6 * j + i < NIN) ? lv[l][6 * j + i] : '0;
      end
      dsp_add_chain6 #(.W(W)) u_add (.clk(clk), .psum(ps), .sum(lv[l+1][j]));
    end
    for (genvar j = NOUT; j < MAXW; j++) begin : g_pad
      assign lv[l+1][j] = '0;
    end
  end

  assign out_data = lv[LEVELS][0];

endmodule
