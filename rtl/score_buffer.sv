// score_buffer: holds the softmax outputs s of the GROUP query heads of a GQA
// group, so that the V phase can start only after all q*K products are done.
//
// Storing scores instead of keeping K and V resident together costs
// GROUP x TOKENS words (4 x 4096 x 24 bit, within two UltraRAMs) instead of a
// second 16-UltraRAM cache buffer. Scores are written one per cycle (head, token)
// after the SPU's softmax and quantization, and replayed for one head as the
// AXPY scalar stream s_0 .. s_(n-1) (valid/ready, synchronous read). The 24-bit
// integer score format is this implementation's choice, matching the AXPY scalar
// input of the engine.
module score_buffer
  import hb_pkg::*;
#(
  parameter int TOKENS = 4096,
  parameter int GROUP  = 4,
  parameter int S_W    = ACT_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_valid,
  input  logic [$clog2(GROUP)-1:0]   wr_head,
  input  logic [$clog2(TOKENS)-1:0]  wr_tok,
  input  logic signed [S_W-1:0]      wr_data,
  input  logic                       rd_start,
  input  logic [$clog2(GROUP)-1:0]   rd_head,
  input  logic [$clog2(TOKENS):0]    rd_n,
  output logic                       rd_valid,
  input  logic                       rd_ready,
  output logic signed [S_W-1:0]      rd_data
);
  localparam int TA = $clog2(TOKENS);
  localparam int HA = $clog2(GROUP);
  logic signed [S_W-1:0] mem [GROUP*TOKENS];

  always_ff @(posedge clk) if (wr_valid) mem[{wr_head, wr_tok}] <= wr_data;

  logic          r_run, fetch;
  logic [TA:0]   r_idx, r_n;
  logic [HA-1:0] r_head;
  assign fetch = r_run && (!rd_valid || rd_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_run <= 1'b0; r_idx <= '0; r_n <= '0; r_head <= '0; rd_valid <= 1'b0;
    end else begin
      if (rd_valid && rd_ready && !fetch) rd_valid <= 1'b0;
      if (rd_start) begin
        r_run <= (rd_n != 0); r_idx <= '0; r_n <= rd_n; r_head <= rd_head;
      end else if (fetch) begin
        rd_valid <= 1'b1;
        r_idx <= r_idx + 1'b1;
        if (r_idx == r_n - 1'b1) r_run <= 1'b0;
      end
    end
  end
  always_ff @(posedge clk) if (fetch) rd_data <= mem[{r_head, r_idx[TA-1:0]}];
endmodule
