// spu_silu: SiLU activation y = x * sigmoid(x) = x / (1 + e^-x), FP16 in and out.
//
// x is taken to Q.16 fixed point and clamped to [-16, 16]; e^-|x| comes from the
// fixed-point exponential of fp16_pkg; sigmoid(|x|) = 1 / (1 + e^-|x|) is one
// fixed-point division, and sigmoid(x) = 1 - sigmoid(|x|) for negative x. The
// product with x is rounded to FP16. Two pipeline stages, one element per cycle.
// The fixed-point method is this implementation's choice.
module spu_silu
  import fp16_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp16_t in_data,
  output logic  out_valid,
  output fp16_t out_data
);
  logic signed [47:0] xf;
  logic signed [31:0] ax;
  logic [31:0]        e, sig_pos;
  logic [31:0]        sig;

  always_comb begin
    xf = fp16_to_fix(in_data, 16);
    if (xf > 48'sd1048576) xf = 48'sd1048576;
    if (xf < -48'sd1048576) xf = -48'sd1048576;
    ax = (xf < 0) ? -32'(xf) : 32'(xf);
    e  = exp_q16(-ax);
    sig_pos = 32'((64'd1 << 32) / (64'd65536 + 64'(e)));   // Q.16
    sig = (xf < 0) ? 32'd65536 - sig_pos : sig_pos;
  end

  fp16_t x_q;
  logic [31:0] sig_q;
  logic v1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; out_valid <= 1'b0; x_q <= '0; sig_q <= '0; out_data <= '0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin x_q <= in_data; sig_q <= sig; end
      out_valid <= v1;
      if (v1) out_data <= fp16_pack(x_q[15], 64'(fp16_mag(x_q[14:0])) * 64'(sig_q), fp16_exp(x_q[14:10]) - 16);
    end
  end
endmodule
