// gemv_engine: the DSP-optimized GEMV compute engine of the vector processing unit.
//
// NCHAIN MAC chains of LEN slices (32 x 4 = 128 MACs) share one activation stream
// (one value per chain per cycle, entering each chain's A1 cascade) and one weight
// vector per cycle (one weight per slice). Two modes, chosen per command:
//
// DOT: y[r] = sum_n W[r][n] * x[n], for R = 4*ngroups rows and N = 128*ncb columns.
//   Work is issued in blocks of 4 rows x 128 columns (row group g, column block c),
//   g outer, c inner. For each block the engine first shifts 4 activation words into
//   the A1 cascades (word k of block c holds x[128c + 4j + 3 - k] for chain j), locks
//   them into A2, then issues the block's 4 weight vectors (row 4g+i, columns of block
//   c, lane 4j+k for chain j slice k). Prefetch of the next block overlaps the rows of
//   the current one, so one row is issued per cycle while weights are available. A
//   missing weight vector inserts a bubble; nothing else stalls. The 32 chain outputs
//   are summed by the six-input adder tree and the ring accumulator sums the ncb
//   column blocks of each row. With ncb = 1 the activations are locked once and
//   reused by every row group. A DOT command with use_fb takes its first (and, with
//   ncb = 1, only) activations from the AXPY results already fed back into the A1
//   cascades instead of from the activation stream.
//   Results: out_valid/out_data, one row per cycle, in row order.
// AXPY: y[l] = bias[l] + sum_i s_i * v_i[l], l = 0..127, for nvec vectors.
//   Optional biases (one 128-lane vector from the bias stream) are loaded through
//   each chain's C broadcast wire, one slice per cycle. Then every cycle in which a
//   scalar s_i and a vector v_i are both available accumulates in place in every
//   slice. After the last vector the engine waits for the chain pipeline and
//   offloads the results down the P cascades: for q = 0..LEN-1, axpy_valid is set
//   with axpy_lane = LEN-1-q and axpy_data[j] = y[4j + LEN-1-q]. With use_fb the
//   offloaded values also enter the chains' A1 cascades (shifted right by fb_shift
//   and saturated to ACT_W bits), ready for a following DOT command with use_fb.
//
// The block order, stream interfaces and command fields are this implementation's;
// the chain/tree/ring structure, the activation reuse over 4 rows, in-place AXPY
// with cascade offload and the direct feedback follow the reference design.
module gemv_engine
  import hb_pkg::*;
#(
  parameter int NCH = NCHAIN,
  parameter int LEN = CHAIN_LEN,
  parameter int A_W = ACT_W,
  parameter int W_W = WGT_W,
  parameter int P_W = ACC_W,
  parameter int CNT_W = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // command
  input  logic                   cmd_valid,
  output logic                   cmd_ready,
  input  logic                   cmd_axpy,       // 0: DOT, 1: AXPY
  input  logic [CNT_W-1:0]       cmd_ngroups,    // DOT: rows / LEN
  input  logic [CNT_W-1:0]       cmd_ncb,        // DOT: columns / (NCH*LEN)
  input  logic [CNT_W-1:0]       cmd_nvec,       // AXPY: vectors
  input  logic                   cmd_use_fb,
  input  logic [5:0]             cmd_fb_shift,
  input  logic                   cmd_use_bias,
  // weight / kv vector stream (one lane per MAC)
  input  logic                   w_valid,
  output logic                   w_ready,
  input  logic signed [W_W-1:0]  w_data [NCH*LEN],
  // activation stream for DOT (one value per chain)
  input  logic                   act_valid,
  output logic                   act_ready,
  input  logic signed [A_W-1:0]  act_data [NCH],
  // scalar stream for AXPY
  input  logic                   sc_valid,
  output logic                   sc_ready,
  input  logic signed [A_W-1:0]  sc_data,
  // bias stream for AXPY
  input  logic                   bias_valid,
  output logic                   bias_ready,
  input  logic signed [A_W-1:0]  bias_data [NCH*LEN],
  // DOT results
  output logic                   out_valid,
  output logic signed [P_W-1:0]  out_data,
  // AXPY results
  output logic                   axpy_valid,
  output logic [$clog2(LEN)-1:0] axpy_lane,
  output logic signed [P_W-1:0]  axpy_data [NCH],
  output logic                   busy
);
  localparam int TREE_LAT = 6;              // two levels of six-input chains for 32 inputs
  localparam int OUT_LAT  = LEN + 1 + TREE_LAT;

  typedef enum logic [2:0] {S_IDLE, S_DOT, S_AXPY_BIAS, S_AXPY, S_AXPY_WAIT, S_OFFLOAD, S_DRAIN} state_t;
  state_t state;

  // latched command
  logic [CNT_W-1:0] ngroups, ncb, nvec;
  logic             use_fb;
  logic [5:0]       fb_shift;

  // DOT bookkeeping
  logic [CNT_W-1:0] pf_blk;       // blocks whose activations have been prefetched
  logic [2:0]       pf_cnt;       // activation words shifted for the pending block
  logic             pf_full;      // pending block's activations sit in A1
  logic [CNT_W-1:0] iss_c;        // column block being issued
  logic             cur_act;      // a block is locked and issuing rows
  logic [2:0]       row_cnt;      // rows issued for the current block
  logic [CNT_W-1:0] blocks_started, blocks_done;
  logic             locked_once;

  // AXPY bookkeeping
  logic [CNT_W-1:0] vec_cnt;
  logic [2:0]       sub_cnt;
  logic [3:0]       wait_cnt;
  logic signed [A_W-1:0] bias_q [NCH*LEN];

  // per-cycle chain controls
  chain_op_t                ch_op;
  logic                     ch_shift, ch_lock, ch_adload, ch_offload, ch_fbsel, ch_cload;
  logic [$clog2(LEN+1)-1:0] ch_cidx;
  logic                     row_issue, row_first, row_last, shift_now, start_blk, reuse;
  logic [CNT_W-1:0]         total_blocks, pf_limit;

  assign total_blocks = CNT_W'(ngroups * ncb);
  // with a single column block the activations are locked once for all row groups
  assign reuse    = (ncb == 1) && locked_once;
  assign pf_limit = (ncb == 1) ? CNT_W'(1) : total_blocks;

  // ---------------------------------------------------------------- control
  always_comb begin
    row_issue  = (state == S_DOT) && cur_act && (row_cnt < 3'(LEN)) && w_valid;
    // the next block may lock in the cycle of the current block's last row: its
    // first row has then reached the last slice, which has already loaded AD
    start_blk  = (state == S_DOT) && (blocks_started < total_blocks) &&
                 (!cur_act || row_cnt == 3'(LEN) || (row_cnt == 3'(LEN - 1) && row_issue)) &&
                 (pf_full || reuse);
    // A1 may shift in the lock cycle: A2 captures the values before the shift
    act_ready  = (state == S_DOT) && (!pf_full || (start_blk && !reuse)) && (pf_blk < pf_limit);
    shift_now  = act_valid && act_ready;
    row_first  = (iss_c == 0);
    row_last   = (iss_c == ncb - 1'b1);
    w_ready    = 1'b0;
    sc_ready   = 1'b0;
    ch_op      = OP_IDLE;
    ch_adload  = 1'b0;
    ch_offload = 1'b0;
    ch_fbsel   = 1'b0;
    ch_cload   = 1'b0;
    ch_cidx    = ($bits(ch_cidx))'(sub_cnt);
    ch_lock    = start_blk && !reuse;
    ch_shift   = shift_now;
    unique case (state)
      S_DOT: begin
        w_ready   = cur_act && (row_cnt < 3'(LEN));
        ch_op     = row_issue ? OP_DOT : OP_IDLE;
        ch_adload = row_issue && (row_cnt == 0);
      end
      S_AXPY_BIAS: ch_cload = 1'b1;
      S_AXPY: begin
        w_ready  = sc_valid;
        sc_ready = w_valid;
        if (w_valid && sc_valid) ch_op = (vec_cnt == 0) ? OP_AXPY_FIRST : OP_AXPY_ACC;
      end
      S_OFFLOAD: begin
        ch_offload = 1'b1;
        ch_fbsel   = use_fb;
        ch_shift   = use_fb;
      end
      default: ;
    endcase
  end

  // an AXPY command with bias takes one bias vector together with the command
  assign cmd_ready  = (state == S_IDLE) && !(cmd_axpy && cmd_use_bias && !bias_valid);
  assign bias_ready = (state == S_IDLE) && cmd_valid && cmd_axpy && cmd_use_bias;
  assign busy       = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ngroups <= '0; ncb <= '0; nvec <= '0; use_fb <= 1'b0; fb_shift <= '0;
      pf_blk <= '0; pf_cnt <= '0; pf_full <= 1'b0; iss_c <= '0;
      cur_act <= 1'b0; row_cnt <= '0; blocks_started <= '0; blocks_done <= '0; locked_once <= 1'b0;
      vec_cnt <= '0; sub_cnt <= '0; wait_cnt <= '0;
      for (int i = 0; i < NCH*LEN; i++) bias_q[i] <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid && cmd_ready) begin
          ngroups <= cmd_ngroups; ncb <= cmd_ncb; nvec <= cmd_nvec;
          use_fb <= cmd_use_fb; fb_shift <= cmd_fb_shift;
          pf_blk  <= cmd_use_fb ? CNT_W'(1) : '0;
          pf_cnt  <= '0;
          pf_full <= cmd_use_fb;
          iss_c <= '0; cur_act <= 1'b0; row_cnt <= '0;
          blocks_started <= '0; blocks_done <= '0; locked_once <= 1'b0;
          vec_cnt <= '0; sub_cnt <= '0; wait_cnt <= '0;
          if (!cmd_axpy) state <= S_DOT;
          else begin
            for (int i = 0; i < NCH*LEN; i++) bias_q[i] <= cmd_use_bias ? bias_data[i] : '0;
            state <= S_AXPY_BIAS;
          end
        end
        S_DOT: begin
          if (shift_now) begin
            if (pf_cnt == 3'(LEN - 1)) begin
              pf_cnt <= '0; pf_full <= 1'b1; pf_blk <= pf_blk + 1'b1;
            end else pf_cnt <= pf_cnt + 1'b1;
          end
          if (row_issue) begin
            row_cnt <= row_cnt + 1'b1;
            if (row_cnt == 3'(LEN - 1)) begin
              blocks_done <= blocks_done + 1'b1;
              iss_c <= (iss_c == ncb - 1'b1) ? '0 : iss_c + 1'b1;
            end
          end
          if (start_blk) begin
            cur_act <= 1'b1;
            row_cnt <= '0;
            blocks_started <= blocks_started + 1'b1;
            if (!reuse) pf_full <= 1'b0;
            locked_once <= 1'b1;
          end
          if (blocks_done == total_blocks) begin
            cur_act  <= 1'b0;
            wait_cnt <= '0;
            state    <= S_DRAIN;
          end
        end
        S_AXPY_BIAS: begin
          if (sub_cnt == 3'(LEN - 1)) begin sub_cnt <= '0; state <= S_AXPY; end
          else sub_cnt <= sub_cnt + 1'b1;
        end
        S_AXPY: if (w_valid && sc_valid) begin
          if (vec_cnt == nvec - 1'b1) begin state <= S_AXPY_WAIT; wait_cnt <= '0; end
          vec_cnt <= vec_cnt + 1'b1;
        end
        S_AXPY_WAIT: begin
          wait_cnt <= wait_cnt + 1'b1;
          if (wait_cnt == 4'(LEN)) begin state <= S_OFFLOAD; sub_cnt <= '0; end
        end
        S_OFFLOAD: begin
          if (sub_cnt == 3'(LEN - 1)) state <= S_IDLE;
          sub_cnt <= sub_cnt + 1'b1;
        end
        S_DRAIN: begin
          // let the last rows leave the chains, the tree and the ring accumulator
          wait_cnt <= wait_cnt + 1'b1;
          if (wait_cnt == 4'(OUT_LAT)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- chains
  logic signed [P_W-1:0] ch_p [NCH];
  logic                  ch_dv [NCH];
  logic signed [P_W-1:0] c_bcast [NCH];

  always_comb
    for (int j = 0; j < NCH; j++)
      c_bcast[j] = P_W'(bias_q[j*LEN + int'(sub_cnt)]);

  for (genvar j = 0; j < NCH; j++) begin : g_chain
    logic signed [W_W-1:0] w_lane [LEN];
    always_comb for (int k = 0; k < LEN; k++) w_lane[k] = w_data[j*LEN + k];
    dsp_mac_chain #(.LEN(LEN), .A_W(A_W), .W_W(W_W), .P_W(P_W)) u_chain (
      .clk       (clk),
      .rst_n     (rst_n),
      .act_in    (act_data[j]),
      .act_shift (ch_shift),
      .act_lock  (ch_lock),
      .fb_sel    (ch_fbsel),
      .fb_shift  (fb_shift),
      .op        (ch_op),
      .w_in      (w_lane),
      .d_in      (sc_data),
      .ad_load   (ch_adload),
      .c_in      (c_bcast[j]),
      .c_load    (ch_cload),
      .c_idx     (ch_cidx),
      .offload   (ch_offload),
      .p_out     (ch_p[j]),
      .dot_valid (ch_dv[j])
    );
    assign axpy_data[j] = ch_p[j];
  end

  // ---------------------------------------------------------------- reduction
  logic signed [P_W-1:0] tree_out;
  adder_tree #(.N(NCH), .W(P_W)) u_tree (.clk(clk), .in_data(ch_p), .out_data(tree_out));

  // row tags travel with the row through the chains (LEN+1) and the tree
  logic [OUT_LAT-1:0] tg_v, tg_f, tg_l;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tg_v <= '0; tg_f <= '0; tg_l <= '0;
    end else begin
      tg_v <= {tg_v[OUT_LAT-2:0], row_issue};
      tg_f <= {tg_f[OUT_LAT-2:0], row_first};
      tg_l <= {tg_l[OUT_LAT-2:0], row_last};
    end
  end

  ring_accumulator #(.PIPE(LEN), .W(P_W)) u_ring (
    .clk(clk), .rst_n(rst_n),
    .in_valid(tg_v[OUT_LAT-1]), .in_first(tg_f[OUT_LAT-1]), .in_last(tg_l[OUT_LAT-1]),
    .in_data(tree_out), .out_valid(out_valid), .out_data(out_data));

  // AXPY offload output: lane LEN-1-q of every chain in offload cycle q
  assign axpy_valid = (state == S_OFFLOAD);
  assign axpy_lane  = $bits(axpy_lane)'(LEN - 1) - $bits(axpy_lane)'(sub_cnt);

  // every chain sees the same DOT control, so their result-valid flags agree
  always @(posedge clk)
    if (rst_n) a_chains_agree: assert (ch_dv[0] == ch_dv[NCH-1]);
endmodule
