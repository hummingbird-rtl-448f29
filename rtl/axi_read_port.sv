// axi_read_port: one 128-bit AXI HP read port of the memory management unit.
//
// Takes sub-commands (byte address, bytes to transfer) from cmd_split and issues
// them as INCR read bursts of up to 256 beats (4 KB), never crossing a 4 KB
// boundary, so a 4 KB column-aligned sub-command is exactly one burst. Several
// bursts may be outstanding. Read data is passed on unchanged with the AXI
// valid/ready handshake (data_valid/data_ready). The burst policy is this
// implementation's; the reference design states only that the accelerator reads
// through four 128-bit HP ports.
module axi_read_port
  import hb_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cmd_valid,
  output logic      cmd_ready,
  input  xfer_cmd_t cmd,
  // AXI read address channel
  output logic      ar_valid,
  input  logic      ar_ready,
  output axi_ar_t   ar,
  // AXI read data channel
  input  logic      r_valid,
  output logic      r_ready,
  input  axi_r_t    r,
  // data out
  output logic            data_valid,
  input  logic            data_ready,
  output logic [HP_W-1:0] data,
  output logic            busy
);
  localparam int BEAT = HP_W / 8;          // 16 bytes

  logic              active;
  logic [ADDR_W-1:0] addr, left;
  logic [ADDR_W-1:0] to4k, blen;
  logic [15:0]       outstanding;

  assign to4k = ADDR_W'(4096) - ADDR_W'(addr[11:0]);
  assign blen = (left < to4k) ? left : to4k;      // bytes of this burst

  assign cmd_ready = !active;
  assign ar_valid  = active;
  assign ar.addr   = addr;
  assign ar.len    = 8'(blen / BEAT - 1);

  assign data_valid = r_valid;
  assign data       = r.data;
  assign r_ready    = data_ready;
  assign busy       = active || (outstanding != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; addr <= '0; left <= '0; outstanding <= '0;
    end else begin
      if (!active) begin
        if (cmd_valid && cmd.btt != 0) begin active <= 1'b1; addr <= cmd.addr; left <= cmd.btt; end
      end else if (ar_ready) begin
        addr <= addr + blen;
        left <= left - blen;
        if (left == blen) active <= 1'b0;
      end
      outstanding <= outstanding + 16'(ar_valid && ar_ready) - 16'(r_valid && r_ready && r.last);
    end
  end

  a_no_4k_cross: assert property (@(posedge clk)
    ar_valid |-> ((ar.addr >> 12) == ((ar.addr + ((ADDR_W'(ar.len) + 1) * BEAT) - 1) >> 12)));
endmodule
