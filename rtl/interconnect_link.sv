// interconnect_link: all-reduce of partial GEMV results between two cores.
//
// With tensor parallelism each core computes a partial result of the attention
// output projection or the MLP down projection over its share of the input; the
// two partials must be added before the normalisation that follows. Every local
// partial (one 48-bit value per cycle from the core's engine) is sent to the peer
// on tx and kept in a FIFO; values received from the peer on rx go to a second
// FIFO; whenever both FIFOs hold a value, their sum leaves on out, in element
// order. With enable low the link is bypassed and local values pass straight
// through (single-core operation). The FIFO scheme and widths are this
// implementation's; the reference design describes the link's role only.
module interconnect_link
  import hb_pkg::*;
#(
  parameter int DEPTH = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    enable,
  input  logic                    loc_valid,
  input  logic signed [ACC_W-1:0] loc_data,
  output logic                    tx_valid,
  output logic signed [ACC_W-1:0] tx_data,
  input  logic                    rx_valid,
  input  logic signed [ACC_W-1:0] rx_data,
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] out_data,
  output logic                    overflow
);
  localparam int AW = $clog2(DEPTH);
  logic signed [ACC_W-1:0] lf [DEPTH], rf [DEPTH];
  logic [AW:0] lw, lr, rw, rr;
  logic        both;

  assign tx_valid = enable && loc_valid;
  assign tx_data  = loc_data;
  assign both     = (lw != lr) && (rw != rr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lw <= '0; lr <= '0; rw <= '0; rr <= '0; out_valid <= 1'b0; out_data <= '0; overflow <= 1'b0;
    end else if (!enable) begin
      out_valid <= loc_valid;
      out_data  <= loc_data;
    end else begin
      if (loc_valid) lw <= lw + 1'b1;
      if (rx_valid)  rw <= rw + 1'b1;
      out_valid <= both;
      if (both) begin
        out_data <= lf[lr[AW-1:0]] + rf[rr[AW-1:0]];
        lr <= lr + 1'b1; rr <= rr + 1'b1;
      end
      if ((loc_valid && (lw - lr) == (AW+1)'(DEPTH)) || (rx_valid && (rw - rr) == (AW+1)'(DEPTH)))
        overflow <= 1'b1;
    end
  end
  always_ff @(posedge clk) begin
    if (enable && loc_valid) lf[lw[AW-1:0]] <= loc_data;
    if (enable && rx_valid)  rf[rw[AW-1:0]] <= rx_data;
  end
endmodule
