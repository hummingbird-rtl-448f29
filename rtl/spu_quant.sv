// spu_quant: quantizes FP16 values to integers for the compute engine.
//
// q = round(x * qscale), saturated to 24 bits (activations for the next GEMV) or,
// with kv8 set, to 8 bits (the linear 8-bit quantization of new k and v entries of
// the cache). qscale is the FP16 reciprocal of the quantization step. Pipelined,
// one element per cycle, latency 1. Rounding is to nearest, ties away from zero.
module spu_quant
  import hb_pkg::*, fp16_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  fp16_t                   in_data,
  input  fp16_t                   in_qscale,
  input  logic                    kv8,
  output logic                    out_valid,
  output logic signed [ACT_W-1:0] out_data
);
  logic signed [47:0] v;
  logic signed [47:0] lim;
  // exact product of the two significands, then rounding to an integer
  logic [21:0] pm;
  int          pe;
  logic [47:0] pr;
  always_comb begin
    pm = 22'(fp16_mag(in_data[14:0])) * 22'(fp16_mag(in_qscale[14:0]));
    pe = fp16_exp(in_data[14:10]) + fp16_exp(in_qscale[14:10]);
    if (pm == 0 || pe < -23)  pr = 48'd0;
    else if (pe > 24)         pr = 48'h7FFF_FFFF;                 // beyond any limit
    else if (pe >= 0)         pr = 48'(pm) << pe;
    else                      pr = (48'(pm) + (48'd1 << (-pe - 1))) >> (-pe);
    v = (in_data[15] ^ in_qscale[15]) ? -signed'(pr) : signed'(pr);
  end
  assign lim = kv8 ? 48'sd127 : 48'sd8388607;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        if (v > lim)       out_data <= ACT_W'(lim);
        else if (v < -lim) out_data <= ACT_W'(-lim);
        else               out_data <= ACT_W'(v);
      end
    end
  end
endmodule
