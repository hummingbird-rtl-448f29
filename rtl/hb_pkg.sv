// hb_pkg: types and constants shared by the Hummingbird core.
//
// The numbers follow the compute-engine specification of the design: 24-bit
// activations, 4/8-bit weights and kv cache, 48-bit DSP accumulators, MAC chains
// of length 4, 32 chains (parallelism 128), a 512-bit weight bus built from four
// 128-bit AXI HP ports, and column-aligned transactions of 2^14 bytes.
// Operation encodings (chain_op_t, vpu_mode_t, spu_op_t, the AXI structs) are this
// implementation's own choice.
package hb_pkg;

  localparam int ACT_W     = 24;   // activation width (INT24)
  localparam int WGT_W     = 8;    // weight lane width (4-bit weights sign-extended, 8-bit kv)
  localparam int ACC_W     = 48;   // DSP P register width
  localparam int CHAIN_LEN = 4;    // DSP MAC chain length
  localparam int NCHAIN    = 32;   // number of MAC chains
  localparam int LANES     = NCHAIN * CHAIN_LEN;  // 128
  localparam int BUS_W     = 512;  // weight bus width
  localparam int HP_W      = 128;  // one AXI HP port
  localparam int NPORT     = 4;    // AXI HP ports used
  localparam int ADDR_W    = 32;
  localparam int FP_W      = 16;   // FP16 in the SPU

  // Per-cycle operation of one DSP slice / MAC chain.
  typedef enum logic [2:0] {
    OP_IDLE       = 3'd0,  // hold P
    OP_DOT        = 3'd1,  // P <= PCIN + A2*B   (cascaded DOT accumulation)
    OP_AXPY_FIRST = 3'd2,  // P <= C + D*B       (in-place accumulation, bias from C)
    OP_AXPY_ACC   = 3'd3,  // P <= P + D*B
    OP_OFFLOAD    = 3'd4   // P <= PCIN          (shift results down the P cascade)
  } chain_op_t;

  // SPU element-wise operation.
  typedef enum logic [2:0] {
    SPU_CONVERT = 3'd0,
    SPU_QUANT   = 3'd1,
    SPU_ROPE    = 3'd2,
    SPU_SILU    = 3'd3,
    SPU_RMSNORM = 3'd4,
    SPU_SOFTMAX = 3'd5
  } spu_op_t;

  // Operations issued by the dataflow control unit.
  typedef enum logic [3:0] {
    OPK_NORM  = 4'd0,   // RMSNorm of the layer input into the activation buffer
    OPK_LOADK = 4'd1,   // K cache of the group's kv head into the kv buffer
    OPK_KPROJ = 4'd2,   // k of the new token: GEMV, RoPE, 8-bit quant, write-back
    OPK_VPROJ = 4'd3,   // v of the new token: GEMV, 8-bit quant, write-back
    OPK_Q     = 4'd4,   // q_i: GEMV, RoPE, quant into the activation buffer
    OPK_QK    = 4'd5,   // q_i * K: GEMV on the kv buffer, softmax, score buffer
    OPK_LOADV = 4'd6,   // V cache into the kv buffer
    OPK_SV    = 4'd7,   // s_i * V: AXPY with feedback into the chains
    OPK_O     = 4'd8    // output projection of head i on the fed-back values
  } op_kind_t;

  // Simplified AXI4 read address / read data channels of one HP port.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [7:0]        len;   // beats - 1
  } axi_ar_t;

  typedef struct packed {
    logic [HP_W-1:0] data;
    logic            last;
  } axi_r_t;

  // A transfer request: byte address and bytes to transfer (BTT).
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [ADDR_W-1:0] btt;
  } xfer_cmd_t;

endpackage
