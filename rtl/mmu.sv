// mmu: memory management unit. Moves weights and kv cache between DRAM and the
// core.
//
// Reads: a read command (byte address, bytes, destination) goes through cmd_split,
// which cuts it into column-aligned transactions spread over the four 128-bit AXI
// HP ports; axi_read_port issues the bursts; port_merge joins the four ports' data
// into 512-bit words. Words go either to the VPU weight stream (dest = DEST_VPU,
// with valid/ready backpressure) or into the on-chip kv buffer (DEST_KV, filled
// from row 0). The kv buffer (one kv head's K or V cache) replays its rows to the
// VPU and takes whole new rows. Write-back of a new k or v row to DRAM leaves on
// the wb_* stream (address and 1024-bit row) toward the memory controller's write
// side. Command format and routing are this implementation's; the split, the four
// ports, the 512-bit bus and the kv buffering follow the reference design.
module mmu
  import hb_pkg::*;
#(
  parameter int COL_BYTES = 16384,
  parameter int TOKENS    = 4096,
  parameter int HEAD_DIM  = 128
) (
  input  logic            clk,
  input  logic            rst_n,
  // read command
  input  logic            rd_valid,
  output logic            rd_ready,
  input  xfer_cmd_t       rd_cmd,
  input  logic            rd_to_kv,       // 1: fill the kv buffer, 0: VPU stream
  // AXI HP ports
  output logic            ar_valid [NPORT],
  input  logic            ar_ready [NPORT],
  output axi_ar_t         ar       [NPORT],
  input  logic            r_valid  [NPORT],
  output logic            r_ready  [NPORT],
  input  axi_r_t          r        [NPORT],
  // VPU weight stream
  output logic            vw_valid,
  input  logic            vw_ready,
  output logic [BUS_W-1:0] vw_data,
  // kv buffer access
  input  logic                      kv_row_we,
  input  logic [$clog2(TOKENS)-1:0] kv_row_addr,
  input  logic [HEAD_DIM*8-1:0]     kv_row_data,
  input  logic                      kv_rd_start,
  input  logic [$clog2(TOKENS):0]   kv_rd_n,
  output logic                      kv_rd_valid,
  input  logic                      kv_rd_ready,
  output logic signed [7:0]         kv_rd_lane [HEAD_DIM],
  // kv write-back
  input  logic                      wb_req,
  input  logic [ADDR_W-1:0]         wb_req_addr,
  output logic                      wb_valid,
  output logic [ADDR_W-1:0]         wb_addr,
  output logic [HEAD_DIM*8-1:0]     wb_data,
  output logic                      busy
);
  logic      to_kv;
  logic      sp_busy;
  logic      sub_valid [NPORT];
  logic      sub_ready [NPORT];
  xfer_cmd_t sub_cmd   [NPORT];
  logic      p_busy    [NPORT];
  logic      d_valid   [NPORT];
  logic      d_ready   [NPORT];
  logic [HP_W-1:0] d_data [NPORT];
  logic      m_valid, m_ready;
  logic [BUS_W-1:0] m_data;

  // destination of the transfer in progress
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) to_kv <= 1'b0;
    else if (rd_valid && rd_ready) to_kv <= rd_to_kv;

  cmd_split #(.COL_BYTES(COL_BYTES)) u_split (
    .clk, .rst_n, .in_valid(rd_valid), .in_ready(rd_ready), .in_cmd(rd_cmd),
    .sub_valid, .sub_ready, .sub_cmd, .busy(sp_busy));

  for (genvar p = 0; p < NPORT; p++) begin : g_port
    axi_read_port u_port (
      .clk, .rst_n,
      .cmd_valid(sub_valid[p]), .cmd_ready(sub_ready[p]), .cmd(sub_cmd[p]),
      .ar_valid(ar_valid[p]), .ar_ready(ar_ready[p]), .ar(ar[p]),
      .r_valid(r_valid[p]), .r_ready(r_ready[p]), .r(r[p]),
      .data_valid(d_valid[p]), .data_ready(d_ready[p]), .data(d_data[p]), .busy(p_busy[p]));
  end

  port_merge u_merge (.clk, .rst_n, .in_valid(d_valid), .in_ready(d_ready), .in_data(d_data),
                      .out_valid(m_valid), .out_ready(m_ready), .out_data(m_data));

  assign vw_valid = m_valid && !to_kv;
  assign vw_data  = m_data;
  assign m_ready  = to_kv ? 1'b1 : vw_ready;

  logic bus_rdy_unused;
  kv_buffer #(.TOKENS(TOKENS), .HEAD_DIM(HEAD_DIM)) u_kv (
    .clk, .rst_n,
    .fill_start(rd_valid && rd_ready && rd_to_kv),
    .bus_valid(m_valid && to_kv), .bus_ready(bus_rdy_unused), .bus_data(m_data),
    .row_we(kv_row_we), .row_addr(kv_row_addr), .row_data(kv_row_data),
    .rd_start(kv_rd_start), .rd_n(kv_rd_n),
    .rd_valid(kv_rd_valid), .rd_ready(kv_rd_ready), .rd_lane(kv_rd_lane));

  // write-back: the row written into the kv buffer (or a v row) leaves with its address
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_valid <= 1'b0; wb_addr <= '0; wb_data <= '0;
    end else begin
      wb_valid <= wb_req;
      if (wb_req) begin wb_addr <= wb_req_addr; wb_data <= kv_row_data; end
    end
  end

  logic any_port_busy;
  always_comb begin
    any_port_busy = 1'b0;
    for (int p = 0; p < NPORT; p++) any_port_busy |= p_busy[p] || d_valid[p];
  end
  assign busy = sp_busy || any_port_busy || m_valid;
endmodule
