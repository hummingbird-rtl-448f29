// dsp_mac_chain: a chain of LEN DSP48E2-style MAC slices that runs either a
// DOT-product GEMV or an AXPY GEMV, switching mode cycle by cycle.
//
// Each slice models the DSP48E2 resources the design relies on: the two-deep A
// input path (A1 prefetch register, A2 lock register), the B weight register, the
// D register, the C register, an AD register after the A/D selection, the
// multiplier and the 48-bit P register with the P cascade (PCIN <- P of the slice
// before). The A/D selection stands for the pre-adder with its INMODE-gated inputs
// acting as a multiplexer; the Z/X/Y/W selection of the P adder stands for OPMODE.
//
// DOT mode (in-DSP prefetching, multiplexing and accumulation):
//   * act_in enters the A1 cascade of slice 0 and shifts one slice per cycle.
//     Activations of a group enter in the order x3, x2, x1, x0.
//   * act_lock copies every A1 into its A2 in the same cycle (one cycle before the
//     group's first row arrives); A2 then holds the activations for LEN rows.
//   * Each row arrives as LEN unskewed weights on w_in with op = OP_DOT. The chain
//     skews weights and control by one cycle per slice (the systolic alignment),
//     loads AD from A2 when a group's first row reaches the slice, and sums the
//     products along the P cascade. The dot product of a row appears on p_out
//     LEN+1 cycles after the row entered (dot_valid marks it).
// AXPY mode (in-place accumulation and in-DSP offloading):
//   * d_in carries the broadcast scalar, w_in one vector element per slice.
//     OP_AXPY_FIRST starts from the slice's C register (bias), OP_AXPY_ACC adds to P.
//   * Biases arrive on the broadcast wire c_in, one per cycle, and slice c_idx
//     captures it when c_load is set; it is held until the first accumulation.
//   * offload (not skewed) shifts P down the cascade: p_out shows lane LEN-1 first,
//     then LEN-2, ..., 0, in consecutive offload cycles. It may start LEN+1 cycles
//     after the last AXPY element entered.
//   * With fb_sel set, the A1 cascade takes the offloaded value (arithmetic right
//     shift by fb_shift, saturated to ACT_W) instead of act_in, so after LEN offload
//     cycles A1 of slice k holds lane k: the direct feedback of AXPY results into
//     the activation path of the next DOT GEMV.
// Register stages, the lock-on-AD scheme and the op encoding are this design's
// choices where the paper shows only the DSP resources and what they are used for.
module dsp_mac_chain
  import hb_pkg::*;
#(
  parameter int LEN    = CHAIN_LEN,
  parameter int A_W    = ACT_W,
  parameter int W_W    = WGT_W,
  parameter int P_W    = ACC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // activation cascade
  input  logic signed [A_W-1:0]   act_in,
  input  logic                    act_shift,
  input  logic                    act_lock,
  input  logic                    fb_sel,
  input  logic [5:0]              fb_shift,
  // per-row inputs (skewed inside)
  input  chain_op_t               op,
  input  logic signed [W_W-1:0]   w_in [LEN],
  input  logic signed [A_W-1:0]   d_in,
  input  logic                    ad_load,     // first row of a DOT group
  // bias broadcast wire
  input  logic signed [P_W-1:0]   c_in,
  input  logic                    c_load,
  input  logic [$clog2(LEN+1)-1:0] c_idx,
  // offload
  input  logic                    offload,
  // output
  output logic signed [P_W-1:0]   p_out,
  output logic                    dot_valid
);

  typedef struct packed {
    chain_op_t             op;
    logic                  ad_load;
    logic signed [A_W-1:0] d;
  } ctl_t;

  // control and weight skew lines: stage k is the input delayed by k cycles
  ctl_t                   ctl_sk [LEN];
  logic signed [W_W-1:0]  w_sk   [LEN][LEN];   // [slice][delay]

  // slice registers
  logic signed [A_W-1:0]  a1 [LEN];
  logic signed [A_W-1:0]  a2 [LEN];
  logic signed [A_W-1:0]  ad [LEN];
  logic signed [A_W-1:0]  dr [LEN];
  logic signed [W_W-1:0]  br [LEN];
  logic signed [P_W-1:0]  cr [LEN];
  logic signed [P_W-1:0]  pr [LEN];
  chain_op_t              opr [LEN];
  logic [LEN:0]           dv;

  logic signed [A_W-1:0]  fb_val, act_src;
  logic signed [P_W-1:0]  fb_shifted;

  localparam logic signed [P_W-1:0] AMAX = P_W'((64'sd1 <<< (A_W-1)) - 1);
  localparam logic signed [P_W-1:0] AMIN = -P_W'(64'sd1 <<< (A_W-1));

  always_comb begin
    fb_shifted = pr[LEN-1] >>> fb_shift;
    if (fb_shifted > AMAX)      fb_val = AMAX[A_W-1:0];
    else if (fb_shifted < AMIN) fb_val = AMIN[A_W-1:0];
    else                        fb_val = fb_shifted[A_W-1:0];
    act_src = fb_sel ? fb_val : act_in;
  end

  always_comb begin
    ctl_sk[0] = '{op: op, ad_load: ad_load, d: d_in};
    for (int k = 0; k < LEN; k++) w_sk[k][0] = w_in[k];
  end

  always_ff @(posedge clk) begin
    for (int k = 1; k < LEN; k++) begin
      ctl_sk[k] <= ctl_sk[k-1];
      for (int j = 1; j < LEN; j++) w_sk[k][j] <= w_sk[k][j-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < LEN; k++) begin
        a1[k] <= '0; a2[k] <= '0; ad[k] <= '0; dr[k] <= '0;
        br[k] <= '0; cr[k] <= '0; pr[k] <= '0; opr[k] <= OP_IDLE;
      end
      dv <= '0;
    end else begin
      dv <= {dv[LEN-1:0], op == OP_DOT};
      for (int k = 0; k < LEN; k++) begin
        // A1 prefetch cascade and A2 lock
        if (act_shift) a1[k] <= (k == 0) ? act_src : a1[k-1];
        if (act_lock)  a2[k] <= a1[k];
        // registered, skewed inputs of slice k
        br[k]  <= w_sk[k][k];
        dr[k]  <= ctl_sk[k].d;
        opr[k] <= ctl_sk[k].op;
        if (ctl_sk[k].ad_load) ad[k] <= a2[k];
        if (c_load && c_idx == k[$bits(c_idx)-1:0]) cr[k] <= c_in;
        // P adder: Z (PCIN / P / 0) + X:Y (product / 0) + W (C / 0)
        if (offload) begin
          pr[k] <= (k == 0) ? '0 : pr[k-1];
        end else begin
          unique case (opr[k])
            OP_DOT:        pr[k] <= ((k == 0) ? P_W'(0) : pr[k-1]) + P_W'(ad[k] * br[k]);
            OP_AXPY_FIRST: pr[k] <= cr[k] + P_W'(dr[k] * br[k]);
            OP_AXPY_ACC:   pr[k] <= pr[k] + P_W'(dr[k] * br[k]);
            default:       pr[k] <= pr[k];
          endcase
        end
      end
    end
  end

  assign p_out     = pr[LEN-1];
  assign dot_valid = dv[LEN];

  // offload must not overlap new DOT/AXPY work entering the chain
  a_offload_idle: assert property (@(posedge clk) offload |-> op == OP_IDLE);

endmodule
