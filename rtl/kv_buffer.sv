// kv_buffer: on-chip copy of one head's K or V cache for grouped-query attention.
//
// In GQA the four query heads of a group share one K and one V cache. The buffer
// holds TOKENS x HEAD_DIM 8-bit values (4096 x 128 x 8 bit = 4 Mbit, 16 UltraRAMs)
// so that the cache is read from DRAM once per group and then streamed to the
// compute engine once per query head. Only one of K or V needs to be resident at a
// time: the schedule finishes every q*K of the group before the V phase reuses the
// buffer. Rows are HEAD_DIM bytes (1024 bits): a row is written as two 512-bit
// words from the memory bus (low half first) or whole in one cycle (the newly
// computed k or v of the current token). A read stream replays rows 0..n-1 as
// 128-lane vectors at one row per cycle (valid/ready, synchronous read). Size and
// role follow the reference design; the ports are this implementation's.
module kv_buffer
  import hb_pkg::*;
#(
  parameter int TOKENS   = 4096,
  parameter int HEAD_DIM = 128
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // fill from the memory bus: 512-bit words, two per row, rows in order from 0
  input  logic                      fill_start,
  input  logic                      bus_valid,
  output logic                      bus_ready,
  input  logic [BUS_W-1:0]          bus_data,
  // write of one whole row (new token)
  input  logic                      row_we,
  input  logic [$clog2(TOKENS)-1:0] row_addr,
  input  logic [HEAD_DIM*8-1:0]     row_data,
  // replay
  input  logic                      rd_start,
  input  logic [$clog2(TOKENS):0]   rd_n,
  output logic                      rd_valid,
  input  logic                      rd_ready,
  output logic signed [7:0]         rd_lane [HEAD_DIM]
);
  localparam int TA = $clog2(TOKENS);
  localparam int RW = HEAD_DIM * 8;
  localparam int HW = RW / 2;

  logic [RW-1:0] mem [TOKENS];

  // fill side
  logic [TA:0]   f_row;
  logic          f_half;
  logic [HW-1:0] f_low;
  assign bus_ready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_row <= '0; f_half <= 1'b0; f_low <= '0;
    end else if (fill_start) begin
      f_row <= '0; f_half <= 1'b0;
    end else if (bus_valid) begin
      if (!f_half) begin f_low <= bus_data[HW-1:0]; f_half <= 1'b1; end
      else begin f_half <= 1'b0; f_row <= f_row + 1'b1; end
    end
  end

  always_ff @(posedge clk) begin
    if (bus_valid && f_half && !fill_start) mem[f_row[TA-1:0]] <= {bus_data[HW-1:0], f_low};
    else if (row_we) mem[row_addr] <= row_data;
  end

  // replay side
  logic          r_run;
  logic [TA:0]   r_idx, r_n;
  logic [RW-1:0] r_q;
  logic          fetch;
  assign fetch = r_run && (!rd_valid || rd_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_run <= 1'b0; r_idx <= '0; r_n <= '0; rd_valid <= 1'b0;
    end else begin
      if (rd_valid && rd_ready && !fetch) rd_valid <= 1'b0;
      if (rd_start) begin
        r_run <= (rd_n != 0); r_idx <= '0; r_n <= rd_n;
      end else if (fetch) begin
        rd_valid <= 1'b1;
        r_idx <= r_idx + 1'b1;
        if (r_idx == r_n - 1'b1) r_run <= 1'b0;
      end
    end
  end
  always_ff @(posedge clk) if (fetch) r_q <= mem[r_idx[TA-1:0]];

  always_comb for (int l = 0; l < HEAD_DIM; l++) rd_lane[l] = r_q[8*l +: 8];
endmodule
