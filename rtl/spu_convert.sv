// spu_convert: converts a 48-bit GEMV accumulator to FP16 and dequantizes it.
//
// y = acc * scale, where acc is the engine's signed integer result and scale the
// FP16 factor that undoes the weight and activation quantization (weight scales
// arrive from memory on the SPU parameter path). The product of the accumulator
// magnitude and the scale's 11-bit significand is normalised and rounded once
// (fp16_pkg). Fully pipelined, one element per cycle, latency 1.
module spu_convert
  import hb_pkg::*, fp16_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [ACC_W-1:0] in_acc,
  input  fp16_t                   in_scale,
  output logic                    out_valid,
  output fp16_t                   out_data
);
  logic [ACC_W-1:0] mag;
  assign mag = in_acc[ACC_W-1] ? ACC_W'(-in_acc) : ACC_W'(in_acc);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        out_data <= fp16_pack(in_acc[ACC_W-1] ^ in_scale[15],
                              64'(mag) * 64'(fp16_mag(in_scale[14:0])), fp16_exp(in_scale[14:10]));
    end
  end
endmodule
