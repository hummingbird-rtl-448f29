// port_merge: joins the four HP ports' read data into 512-bit words.
//
// Each port has a small FIFO; a 512-bit word {port3, port2, port1, port0} is
// emitted whenever every FIFO holds a beat. Because port p reads the p-th quarter
// of each column-aligned transaction, weights are stored so that the k-th beats of
// the four quarters together form the k-th 512-bit word; the order in which the
// memory controller serves the ports then does not matter, and no reordering
// buffer is needed. The FIFOs absorb the skew between ports. That memory layout
// and the FIFO depth are this implementation's choices.
module port_merge
  import hb_pkg::*;
#(
  parameter int NP    = NPORT,
  parameter int DEPTH = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid [NP],
  output logic            in_ready [NP],
  input  logic [HP_W-1:0] in_data  [NP],
  output logic            out_valid,
  input  logic            out_ready,
  output logic [NP*HP_W-1:0] out_data
);
  localparam int AW = $clog2(DEPTH);
  logic [HP_W-1:0] fifo [NP][DEPTH];
  logic [AW:0]     wp [NP], rp [NP];
  logic [NP-1:0]   nonempty;
  logic            pop;

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      nonempty[p] = (wp[p] != rp[p]);
      in_ready[p] = (wp[p] - rp[p]) != (AW+1)'(DEPTH);
      out_data[p*HP_W +: HP_W] = fifo[p][rp[p][AW-1:0]];
    end
    out_valid = &nonempty;
    pop       = out_valid && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NP; p++) begin wp[p] <= '0; rp[p] <= '0; end
    end else begin
      for (int p = 0; p < NP; p++) begin
        if (in_valid[p] && in_ready[p]) wp[p] <= wp[p] + 1'b1;
        if (pop) rp[p] <= rp[p] + 1'b1;
      end
    end
  end
  always_ff @(posedge clk)
    for (int p = 0; p < NP; p++)
      if (in_valid[p] && in_ready[p]) fifo[p][wp[p][AW-1:0]] <= in_data[p];
endmodule
