// Shared constants and types of the Chimera RTL.
//
// The transformer acceleration cluster (TAC) accelerator uses 16 processing
// elements, each a 64-way int8 dot product with a 22-bit result, a 26-bit
// accumulator and an 8-bit requantized output; the L2 memory island holds
// 256 KiB in two interleaved wide banks of sixteen 32-bit word banks each,
// reached through five 512-bit AXI4 ports and one 32-bit AXI4 port. Those
// sizes follow the published description. Encodings (activation select,
// QoS policy select, register map) are this implementation's own choices.
package chimera_pkg;

  // ---------------- TAC accelerator ----------------
  localparam int unsigned TAC_N_PE     = 16;  // processing elements
  localparam int unsigned TAC_DOTP_N   = 64;  // dot-product length per PE
  localparam int unsigned TAC_DOTP_W   = 22;  // dot-product result width
  localparam int unsigned TAC_ACC_W    = 26;  // accumulator / partial-sum width
  localparam int unsigned TAC_PSUM_ROWS = 64; // rows held in the partial-sum buffer
  localparam int unsigned TAC_N_PORTS  = 16;  // 64-bit TCDM master ports

  typedef enum logic [1:0] {
    ACT_IDENTITY = 2'd0,
    ACT_RELU     = 2'd1,
    ACT_GELU     = 2'd2
  } act_mode_e;

  // Requantization: y = clip8(((acc * mult) + round) >>> shift) + add)
  typedef struct packed {
    logic [7:0]        mult;
    logic [4:0]        shift;
    logic signed [7:0] add;
  } requant_t;

  // Accelerator register map (32-bit registers, word index)
  localparam int unsigned TAC_REG_CTRL    = 0;  // write bit 0: start
  localparam int unsigned TAC_REG_STATUS  = 1;  // bit 0 busy, bit 1 done
  localparam int unsigned TAC_REG_I_BASE  = 2;
  localparam int unsigned TAC_REG_W_BASE  = 3;
  localparam int unsigned TAC_REG_B_BASE  = 4;
  localparam int unsigned TAC_REG_O_BASE  = 5;
  localparam int unsigned TAC_REG_M       = 6;
  localparam int unsigned TAC_REG_K       = 7;
  localparam int unsigned TAC_REG_N       = 8;
  localparam int unsigned TAC_REG_REQUANT = 9;  // [7:0] mult, [12:8] shift, [23:16] add
  localparam int unsigned TAC_REG_MODE    = 10; // [1:0] act, [2] softmax accumulate, [3] softmax normalize
  localparam int unsigned TAC_N_REGS      = 11;

  // ---------------- L2 memory island ----------------
  localparam int unsigned L2_BYTES        = 256 * 1024;
  localparam int unsigned L2_WIDE_DW      = 512;
  localparam int unsigned L2_NARROW_DW    = 32;
  localparam int unsigned L2_N_WIDE_PORTS = 5;
  localparam int unsigned L2_N_WIDE_BANKS = 2;
  localparam int unsigned L2_WORDS_PER_WB = L2_WIDE_DW / L2_NARROW_DW; // 16

  typedef enum logic {
    QOS_FIXED   = 1'b0,  // narrow always wins
    QOS_BOUNDED = 1'b1   // narrow wins, but a wide request refused BOUND times in a row wins once
  } qos_mode_e;

  // ---------------- cluster TCDM ----------------
  localparam int unsigned TCDM_BYTES   = 128 * 1024;
  localparam int unsigned TCDM_N_BANKS = 32;
  localparam int unsigned TCDM_DW      = 64;

endpackage
