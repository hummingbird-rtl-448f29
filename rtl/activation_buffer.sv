// activation_buffer: on-chip store of INT24 activations between the SPU and the
// compute engine.
//
// Storage is NCH banks (one per MAC chain), each DEPTH/NCH words deep. Element e
// is written (from the SPU, one element per cycle) to bank (e mod 128) / 4 at word
// 4*(e / 128) + 3 - (e mod 4). Word 4c+k of every bank then holds, for chain j,
// x[128c + 4j + 3 - k]: reading words 4c..4c+3 gives exactly the order in which a
// MAC chain prefetches the activations of column block c.
// Two read sequencers, one at a time:
//   DOT   (dot_start): streams words dot_base .. dot_base+4*ncb-1 of all banks, repeated ngroups
//         times (once only when ncb = 1, as the engine locks those activations for
//         every row group), on act_valid/act_data/act_ready.
//   AXPY  (sc_start): streams elements sc_base .. sc_base+sc_n-1 one per cycle as
//         broadcast scalars on sc_valid/sc_data/sc_ready.
// Reads are synchronous: the memory output register is the stream's output
// register, refilled whenever it is empty or being taken. The buffer's size and
// the bank layout are this implementation's choices; the reference design gives
// only the buffer's role and its connections.
module activation_buffer
  import hb_pkg::*;
#(
  parameter int DEPTH = 14336,
  parameter int NCH   = NCHAIN,
  parameter int A_W   = ACT_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // write port (SPU output)
  input  logic                 wr_valid,
  input  logic [$clog2(DEPTH)-1:0] wr_idx,
  input  logic signed [A_W-1:0] wr_data,
  // DOT read sequencer
  input  logic                 dot_start,
  input  logic [15:0]          dot_ncb,
  input  logic [15:0]          dot_ngroups,
  input  logic [15:0]          dot_base,      // first word (4 per 128 elements)
  output logic                 act_valid,
  input  logic                 act_ready,
  output logic signed [A_W-1:0] act_data [NCH],
  // AXPY scalar read sequencer
  input  logic                 sc_start,
  input  logic [$clog2(DEPTH)-1:0] sc_base,
  input  logic [15:0]          sc_n,
  output logic                 sc_valid,
  input  logic                 sc_ready,
  output logic signed [A_W-1:0] sc_data,
  output logic                 busy
);
  localparam int BW    = DEPTH / NCH;            // words per bank
  localparam int WA_W  = $clog2(BW);
  localparam int BA_W  = $clog2(NCH);
  localparam int IX_W  = $clog2(DEPTH);

  logic signed [A_W-1:0] mem [NCH][BW];

  // element index -> bank / word
  function automatic logic [BA_W-1:0] bank_of(logic [IX_W-1:0] e);
    return BA_W'((int'(e) % (NCH * 4)) / 4);
  endfunction
  function automatic logic [WA_W-1:0] word_of(logic [IX_W-1:0] e);
    return WA_W'(4 * (int'(e) / (NCH * 4)) + 3 - (int'(e) % 4));
  endfunction

  always_ff @(posedge clk)
    if (wr_valid) mem[bank_of(wr_idx)][word_of(wr_idx)] <= wr_data;

  // ---- DOT sequencer
  logic        dot_run, sc_run;
  logic [15:0] d_word, d_grp, d_ngrp, d_nword, d_base;
  logic        d_fetch;
  assign d_fetch = dot_run && (!act_valid || act_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dot_run <= 1'b0; act_valid <= 1'b0; d_word <= '0; d_grp <= '0; d_ngrp <= '0; d_nword <= '0;
      d_base <= '0;
    end else begin
      if (act_valid && act_ready && !d_fetch) act_valid <= 1'b0;
      if (dot_start && !busy) begin
        dot_run <= 1'b1; d_word <= '0; d_grp <= '0; d_base <= dot_base;
        d_nword <= 16'(4 * dot_ncb);
        d_ngrp  <= (dot_ncb == 1) ? 16'd1 : dot_ngroups;
      end else if (d_fetch) begin
        act_valid <= 1'b1;
        if (d_word == d_nword - 1'b1) begin
          d_word <= '0;
          if (d_grp == d_ngrp - 1'b1) dot_run <= 1'b0;
          d_grp <= d_grp + 1'b1;
        end else d_word <= d_word + 1'b1;
      end
    end
  end
  always_ff @(posedge clk)
    if (d_fetch)
      for (int j = 0; j < NCH; j++) act_data[j] <= mem[j][WA_W'(d_base + d_word)];

  // ---- AXPY scalar sequencer
  logic [IX_W-1:0] s_idx;
  logic [15:0]     s_left;
  logic            s_fetch;
  assign s_fetch = sc_run && (!sc_valid || sc_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sc_run <= 1'b0; sc_valid <= 1'b0; s_idx <= '0; s_left <= '0;
    end else begin
      if (sc_valid && sc_ready && !s_fetch) sc_valid <= 1'b0;
      if (sc_start && !busy) begin
        sc_run <= (sc_n != 0); s_idx <= sc_base; s_left <= sc_n;
      end else if (s_fetch) begin
        sc_valid <= 1'b1;
        s_idx    <= s_idx + 1'b1;
        s_left   <= s_left - 1'b1;
        if (s_left == 1) sc_run <= 1'b0;
      end
    end
  end
  always_ff @(posedge clk)
    if (s_fetch) sc_data <= mem[bank_of(s_idx)][word_of(s_idx)];

  assign busy = dot_run || sc_run;
endmodule
