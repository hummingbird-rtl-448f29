// embedding_buffer: FIFO that receives the current token's embedding vector.
//
// The embedding table stays on the SD card; the host reads the selected FP16 row
// straight into a PL address region (no copy through DRAM, no DMA) and that region
// is this FIFO's write port: 128-bit words, eight FP16 elements each, element 0 in
// the low bits. The read side delivers one FP16 element per cycle to the SPU
// (valid/ready), for the RMSNorm and the residual path. DEPTH is in elements
// (one LLaMA3-8B hidden vector is 4096). Word width and unpacking order are this
// implementation's choices.
module embedding_buffer
  import hb_pkg::*;
#(
  parameter int DEPTH = 4096
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            wr_valid,
  output logic            wr_ready,
  input  logic [HP_W-1:0] wr_data,
  output logic            rd_valid,
  input  logic            rd_ready,
  output logic [FP_W-1:0] rd_data,
  output logic [$clog2(DEPTH):0] level    // elements held
);
  localparam int EPW = HP_W / FP_W;          // 8 elements per word
  localparam int WD  = DEPTH / EPW;
  localparam int AW  = $clog2(WD);
  localparam int EW  = $clog2(EPW);

  logic [HP_W-1:0] mem [WD];
  logic [AW:0]     wp, rp;
  logic [EW-1:0]   sub;

  assign wr_ready = (wp - rp) != (AW+1)'(WD);
  assign rd_valid = (wp != rp);
  assign rd_data  = mem[rp[AW-1:0]][FP_W*sub +: FP_W];
  logic [AW:0] words_held;
  assign words_held = wp - rp;
  assign level    = ($clog2(DEPTH)+1)'(int'(words_held) * EPW - int'(sub));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; sub <= '0;
    end else begin
      if (wr_valid && wr_ready) wp <= wp + 1'b1;
      if (rd_valid && rd_ready) begin
        sub <= sub + 1'b1;
        if (sub == EW'(EPW - 1)) rp <= rp + 1'b1;
      end
    end
  end
  always_ff @(posedge clk) if (wr_valid && wr_ready) mem[wp[AW-1:0]] <= wr_data;
endmodule
