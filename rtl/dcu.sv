// dcu: dataflow control unit. Steps through the attention-layer schedule and
// hands one operation at a time to the datapath.
//
// For each GQA group (GROUP query heads sharing one kv head) the schedule is the
// reordered one that keeps only one of the K and V caches on chip:
//   LOADK, KPROJ, VPROJ, Q0, Q1, QK0, Q2, QK1, Q3, QK2, QK3,
//   LOADV, SV0, O0, SV1, O1, SV2, O2, SV3, O3            (GROUP = 4)
// Two query projections run ahead of the first q*K, so every q_i has finished its
// rotary embedding before q_i*K needs it; all q_i*K of the group (whose softmax
// outputs go to the score buffer) finish before the V cache replaces the K cache
// in the on-chip buffer; each s_i*V is followed by the output projection of head
// i, which takes the s_i*V results directly from the engine's feedback path. A
// layer begins with NORM (RMSNorm of the layer input). The order of the GEMVs is
// the reference design's; the explicit LOAD and NORM steps and the
// issue/done handshake are this implementation's.
// Interface: start with ngroups; op_valid/op_ready hand out (op_kind, op_head,
// op_group); the datapath pulses op_done when the operation has completed. done
// pulses after the last operation.
module dcu
  import hb_pkg::*;
#(
  parameter int GROUP  = 4,
  parameter int MAXGRP = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [$clog2(MAXGRP):0]    ngroups,
  output logic                       op_valid,
  input  logic                       op_ready,
  output op_kind_t                   op_kind,
  output logic [$clog2(GROUP)-1:0]   op_head,
  output logic [$clog2(MAXGRP)-1:0]  op_group,
  input  logic                       op_done,
  output logic                       done,
  output logic                       busy
);
  localparam int PLEN = 5 + 4 * GROUP;       // LOADK KPROJ VPROJ LOADV + 4 per head, + NORM slot
  localparam int HW   = $clog2(GROUP);

  typedef struct packed {
    op_kind_t        kind;
    logic [HW-1:0]   head;
  } step_t;

  step_t prog [PLEN];
  int    plen_g;

  // the per-group program
  always_comb begin
    int k;
    k = 0;
    for (int i = 0; i < PLEN; i++) prog[i] = '{kind: OPK_NORM, head: '0};
    prog[k] = '{kind: OPK_LOADK, head: '0}; k++;
    prog[k] = '{kind: OPK_KPROJ, head: '0}; k++;
    prog[k] = '{kind: OPK_VPROJ, head: '0}; k++;
    prog[k] = '{kind: OPK_Q, head: '0}; k++;
    if (GROUP > 1) begin prog[k] = '{kind: OPK_Q, head: HW'(1)}; k++; end
    for (int i = 0; i < GROUP; i++) begin
      prog[k] = '{kind: OPK_QK, head: HW'(i)}; k++;
      if (i + 2 < GROUP) begin prog[k] = '{kind: OPK_Q, head: HW'(i + 2)}; k++; end
    end
    prog[k] = '{kind: OPK_LOADV, head: '0}; k++;
    for (int i = 0; i < GROUP; i++) begin
      prog[k] = '{kind: OPK_SV, head: HW'(i)}; k++;
      prog[k] = '{kind: OPK_O,  head: HW'(i)}; k++;
    end
    plen_g = k;
  end

  typedef enum logic [1:0] {D_IDLE, D_ISSUE, D_WAIT} dst_t;
  dst_t st;
  logic                     norm_step;
  logic [$clog2(PLEN)-1:0]  step;
  logic [$clog2(MAXGRP):0]  grp, ngrp;

  assign op_valid = (st == D_ISSUE);
  assign op_kind  = norm_step ? OPK_NORM : prog[step].kind;
  assign op_head  = norm_step ? '0 : prog[step].head;
  assign op_group = grp[$clog2(MAXGRP)-1:0];
  assign busy     = (st != D_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; step <= '0; grp <= '0; ngrp <= '0; norm_step <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        D_IDLE: if (start && ngroups != 0) begin
          st <= D_ISSUE; step <= '0; grp <= '0; ngrp <= ngroups; norm_step <= 1'b1;
        end
        D_ISSUE: if (op_ready) st <= D_WAIT;
        D_WAIT: if (op_done) begin
          st <= D_ISSUE;
          if (norm_step) norm_step <= 1'b0;
          else if (int'(step) == plen_g - 1) begin
            step <= '0;
            grp  <= grp + 1'b1;
            if (grp == ngrp - 1'b1) begin st <= D_IDLE; done <= 1'b1; end
          end else step <= step + 1'b1;
        end
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule
