// weight_unpack: turns 512-bit memory words into 128-lane weight vectors for the
// compute engine.
//
// 4-bit mode (w8 = 0): one word holds 128 signed 4-bit weights, lane l in bits
// [4l+3:4l]; each word becomes one vector, so 4-bit weights stream at the full
// engine rate. 8-bit mode (w8 = 1, the kv cache): a vector takes two words, lanes
// 0..63 from the first and 64..127 from the second, lane l in bits [8l+7:8l] of
// its word; the first word is held in a register until the second arrives.
// Valid/ready on both sides; the output is combinational from the held word and
// the input word (no extra latency). Lane order and the two-word 8-bit format are
// this implementation's choice.
module weight_unpack
  import hb_pkg::*;
#(
  parameter int BW    = BUS_W,
  parameter int NLANE = LANES
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   w8,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [BW-1:0]          in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic signed [7:0]      out_lane [NLANE]
);
  logic          half;        // first half of an 8-bit vector is held
  logic [BW-1:0] held;

  always_comb begin
    if (!w8) begin
      for (int l = 0; l < NLANE; l++) out_lane[l] = 8'(signed'(in_data[4*l +: 4]));
      out_valid = in_valid;
      in_ready  = out_ready;
    end else begin
      for (int l = 0; l < NLANE; l++)
        out_lane[l] = (l < NLANE / 2) ? held[8*l +: 8] : in_data[8*(l - NLANE/2) +: 8];
      out_valid = in_valid && half;
      in_ready  = half ? out_ready : 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      half <= 1'b0;
      held <= '0;
    end else if (w8 && in_valid && in_ready) begin
      if (!half) begin held <= in_data; half <= 1'b1; end
      else half <= 1'b0;
    end else if (!w8) half <= 1'b0;
  end
endmodule
