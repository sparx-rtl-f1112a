// Shared types and constants of the SPARX accelerator.
//
// The custom instruction (opcode 7'b1111011) carries a three-bit mode field
// abc in func3: a = privacy (noise injection and authentication), b =
// approximate arithmetic (ILM multiplier instead of the exact Booth
// multiplier), c = model variant (0: MNIST, 1: CIFAR-10).  imm[11:0] holds
// three 4-bit fields: key [31:28], challenge [27:24], signature [23:20].
//
// The layer shapes below describe the small network the control engine runs
// for each variant: 3x3 convolution to 8 channels (batch norm, ReLU), 2x2
// pooling, one fully connected layer to 10 classes, argmax.  The encoding
// and field positions follow the paper; the layer shapes, bank sizes and
// address map are this design's own choice.
package sparx_pkg;

  localparam logic [6:0] OPC_SPARX = 7'b1111011;

  typedef struct packed {
    logic privacy;   // a
    logic approx;    // b
    logic cifar;     // c
  } mode_t;

  typedef struct packed {
    logic [3:0] key;
    logic [3:0] challenge;
    logic [3:0] signature;
  } auth_fields_t;

  // Systolic array edge and network constants
  localparam int unsigned ARRAY_N = 8;
  localparam int unsigned KS      = 3;     // conv kernel size
  localparam int unsigned COUT    = 8;     // conv output channels
  localparam int unsigned NCLS    = 10;    // classes

  // Model geometry: MNIST 28x28x1, CIFAR-10 32x32x3
  localparam int unsigned MN_H = 28, MN_C = 1;
  localparam int unsigned CF_H = 32, CF_C = 3;

  // Bank sizes (entries)
  localparam int unsigned IN_DEPTH   = 4096;   // input bank, bytes
  localparam int unsigned W_DEPTH    = 32768;  // weight bank, bytes
  localparam int unsigned B_DEPTH    = 64;     // bias bank, 16-bit words
  localparam int unsigned ACT_DEPTH  = 8192;   // conv output buffer, 32*32*8
  localparam int unsigned POOL_DEPTH = 2048;   // pooled buffer, 16*16*8

  // Weight-bank layout: conv weights [k][cout] at 0, FC weights [k][cls] at FC_W_BASE
  localparam int unsigned FC_W_BASE = 256;
  // Bias-bank layout (16-bit words)
  localparam int unsigned BN_SCALE_BASE = 0;   // 8 per-channel scales
  localparam int unsigned BN_BIAS_BASE  = 8;   // 8 per-channel biases
  localparam int unsigned FC_BIAS_BASE  = 16;  // 10 class biases
  localparam int unsigned BN_SHIFT      = 8;

  // AXI-Lite regions, address bits [19:18]
  typedef enum logic [1:0] {
    RGN_INPUT  = 2'd0,
    RGN_WEIGHT = 2'd1,
    RGN_BIAS   = 2'd2,
    RGN_REGS   = 2'd3
  } region_e;

  // Control engine phases
  typedef enum logic [3:0] {
    S_IDLE, S_VERIFY, S_AUTH,
    S_CONV_FEED, S_CONV_WAIT, S_CONV_DRAIN,
    S_POOL,
    S_FC_FEED, S_FC_WAIT, S_FC_DRAIN,
    S_ARGMAX, S_RESULT, S_DONE, S_DENY
  } ce_state_e;

  // Result word returned to rd
  localparam int unsigned RES_DENIED_BIT = 31;

endpackage
