// dsp_add_chain6: six-input pipelined adder built from three cascaded DSP adders,
// the building block of the engine's reduction tree.
//
// Each DSP adds three operands: its C input, the 48-bit word formed by
// concatenating its A (30-bit) and B (18-bit) inputs, and the P cascade of the DSP
// before it. All six partial sums are presented in the same cycle; the input
// pipeline depths of each DSP absorb the systolic skew, as in the reference layout:
//   DSP0: AREG=0, BREG=0, CREG=0   psum0 (C) + psum1 (A:B)
//   DSP1: AREG=1, BREG=1, CREG=1   psum2 (C) + psum3 (A:B) + PCIN
//   DSP2: AREG=2, BREG=2, CREG=1   psum4 (one fabric register + C) + psum5 (A:B) + PCIN
// The only fabric flip-flops are the 48-bit register in front of DSP2's C port.
// sum is valid 3 cycles after the inputs (latency 3). Arithmetic wraps
// modulo 2^W, as the DSP's 48-bit adder does.
module dsp_add_chain6 #(
  parameter int W = 48
) (
  input  logic                clk,
  input  logic signed [W-1:0] psum [6],
  output logic signed [W-1:0] sum
);

  // DSP0 (no input registers)
  logic signed [W-1:0] p0;
  // DSP1 input registers (depth 1)
  logic signed [W-1:0] c1, ab1, p1;
  // DSP2 input registers: A/B depth 2, C depth 1 behind one fabric register
  logic signed [W-1:0] ab2_1, ab2_2, c2_fab, c2, p2;

  always_ff @(posedge clk) begin
    p0     <= psum[0] + psum[1];
    c1     <= psum[2];
    ab1    <= psum[3];
    p1     <= p0 + c1 + ab1;
    ab2_1  <= psum[5];
    ab2_2  <= ab2_1;
    c2_fab <= psum[4];
    c2     <= c2_fab;
    p2     <= p1 + c2 + ab2_2;
  end

  assign sum = p2;

endmodule
