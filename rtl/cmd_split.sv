// cmd_split: column-aligned splitting of a memory transfer over the four AXI HP
// ports.
//
// The PS memory controller arbitrates between the HP ports in an order the
// accelerator cannot control; if the ports' requests fall into different DRAM rows
// or banks, the arbitration causes row switches and bandwidth is lost. The split
// keeps all four ports inside one open row: a transfer (addr, btt) is cut into
// transactions that never cross a COL_BYTES boundary (2^14 bytes, the column
// address range of one row/bank in the controller's address map, the best
// transaction size measured on the target boards), and each transaction is cut
// into NPORT equal, contiguous sub-commands: port p gets bytes
// [p*len/NPORT, (p+1)*len/NPORT) of it (4 KB per port for a full transaction).
// Each port's sub-command has its own valid/ready; the next transaction is cut only
// when all ports have taken theirs. Transfers are assumed to be multiples of
// NPORT*16 bytes and 64-byte aligned (so every sub-command is whole 16-byte beats).
module cmd_split
  import hb_pkg::*;
#(
  parameter int COL_BYTES = 16384,
  parameter int NP        = NPORT
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  xfer_cmd_t in_cmd,
  output logic      sub_valid [NP],
  input  logic      sub_ready [NP],
  output xfer_cmd_t sub_cmd   [NP],
  output logic      busy
);
  localparam int CB = $clog2(COL_BYTES);

  logic              active;
  logic [ADDR_W-1:0] cur, left;
  logic [NP-1:0]     pend;
  logic [ADDR_W-1:0] room, tlen, part;

  // bytes up to the next column boundary, and this transaction's length
  assign room = ADDR_W'(COL_BYTES) - ADDR_W'(cur[CB-1:0]);
  assign tlen = (left < room) ? left : room;
  assign part = tlen / NP;

  assign in_ready = !active;
  assign busy     = active;

  always_comb
    for (int p = 0; p < NP; p++) begin
      sub_valid[p]    = active && pend[p];
      sub_cmd[p].addr = cur + ADDR_W'(p) * part;
      sub_cmd[p].btt  = part;
    end

  logic [NP-1:0] taken;
  always_comb
    for (int p = 0; p < NP; p++) taken[p] = sub_valid[p] && sub_ready[p];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; cur <= '0; left <= '0; pend <= '0;
    end else if (!active) begin
      if (in_valid && in_cmd.btt != 0) begin
        active <= 1'b1; cur <= in_cmd.addr; left <= in_cmd.btt; pend <= '1;
      end
    end else begin
      if ((pend & ~taken) == '0) begin
        // whole transaction handed out: move to the next one
        cur  <= cur + tlen;
        left <= left - tlen;
        pend <= '1;
        if (left == tlen) active <= 1'b0;
      end else pend <= pend & ~taken;
    end
  end

  // every transaction stays within one column-aligned region
  a_aligned: assert property (@(posedge clk)
    active |-> ((cur >> CB) == ((cur + tlen - 1) >> CB)));
endmodule
