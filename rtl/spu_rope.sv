// spu_rope: rotary position embedding of one element pair per cycle.
//
// (y0, y1) = (x0*cos - x1*sin, x0*sin + x1*cos), all FP16. x0 and x1 are the two
// elements the rotation pairs (element i and i + d/2 of a head in the LLaMA
// layout, which is why a head's rotation can only finish once the whole query or
// key vector exists); cos and sin of the position angle arrive with them from the
// parameter path. Two pipeline stages (products, then sums), one pair per cycle.
module spu_rope
  import fp16_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp16_t x0,
  input  fp16_t x1,
  input  fp16_t cos_v,
  input  fp16_t sin_v,
  output logic  out_valid,
  output fp16_t y0,
  output fp16_t y1
);
  fp16_t p0c, p1s, p0s, p1c;
  logic  v1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; out_valid <= 1'b0;
      p0c <= '0; p1s <= '0; p0s <= '0; p1c <= '0; y0 <= '0; y1 <= '0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        p0c <= fp16_mul(x0, cos_v); p1s <= fp16_mul(x1, sin_v);
        p0s <= fp16_mul(x0, sin_v); p1c <= fp16_mul(x1, cos_v);
      end
      out_valid <= v1;
      if (v1) begin
        y0 <= fp16_add(p0c, fp16_neg(p1s));
        y1 <= fp16_add(p0s, p1c);
      end
    end
  end
endmodule
