// accelb_net_pkg: the network the default accelerator instance is built for.
//
// The accelerator is a chain of pipeline stages, one per fused layer, each
// sized for its layer; a generator would emit one such set of constants per
// network. This instance is a small image classifier with the hybrid
// precision pattern "4-8218": 4-bit activations, 8-bit weights in the first
// CONV, ternary weights in the middle CONV, binary weights in the middle FC
// and 8-bit weights in the last FC; 8-bit image input, 16-bit class scores.
// The layer sizes and parallelism (P inputs per CE, N CEs per stage) are
// this design's choice; they keep a full frame quick to simulate.
//
//   L1 CONV 3x3/1 pad 1, 16x16x3  -> 16x16x16, 8-bit weights, P=4,  N=8
//   POOL1 2x2/2,         16x16x16 -> 8x8x16
//   L2 CONV 3x3/1 pad 1, 8x8x16   -> 8x8x32,   ternary,       P=16, N=8
//   POOL2 2x2/2,         8x8x32   -> 4x4x32
//   L3 FC,               4x4x32   -> 64,       binary,        P=16, N=16
//   L4 FC (last),        64       -> 10,       8-bit weights, P=16, N=10
package accelb_net_pkg;
  import elb_pkg::*;

  localparam int ACT_W  = 4;    // activation bit width between layers
  localparam int IMG_W  = 8;    // image input bit width
  localparam int SCORE_W = 16;  // last-layer output bit width
  localparam int ACC_W  = 24;   // accumulator width
  localparam int MAW    = 32;   // external memory word-address width
  localparam int NL     = 4;    // weighted layers (stages with a memory port)

  // L1
  localparam int L1_H = 16, L1_W = 16, L1_C = 3, L1_M = 16, L1_K = 3, L1_S = 1, L1_PAD = 1;
  localparam int L1_P = 4, L1_N = 8, L1_NG = 3;
  localparam wmode_t L1_WM = WM_FIX8;
  localparam int L1_BLSH = 8, L1_RSH = 12, L1_BASE = 0;
  // POOL1
  localparam int Q1_H = 16, Q1_W = 16, Q1_C = 16, Q1_P = 4, Q1_NG = L1_N;
  // L2
  localparam int L2_H = 8, L2_W = 8, L2_C = 16, L2_M = 32, L2_K = 3, L2_S = 1, L2_PAD = 1;
  localparam int L2_P = 16, L2_N = 8, L2_NG = 16;
  localparam wmode_t L2_WM = WM_TER;
  localparam int L2_BLSH = 6, L2_RSH = 10, L2_BASE = 1024;
  // POOL2
  localparam int Q2_H = 8, Q2_W = 8, Q2_C = 32, Q2_P = 8, Q2_NG = L2_N;
  // L3
  localparam int L3_H = 4, L3_W = 4, L3_C = 32, L3_M = 64, L3_K = 4, L3_S = 1, L3_PAD = 0;
  localparam int L3_P = 16, L3_N = 16, L3_NG = 32;
  localparam wmode_t L3_WM = WM_BIN;
  localparam int L3_BLSH = 8, L3_RSH = 12, L3_BASE = 2048;
  // L4
  localparam int L4_H = 1, L4_W = 1, L4_C = 64, L4_M = 10, L4_K = 1, L4_S = 1, L4_PAD = 0;
  localparam int L4_P = 16, L4_N = 10, L4_NG = L3_N;
  localparam wmode_t L4_WM = WM_FIX8;
  localparam int L4_BLSH = 4, L4_RSH = 8, L4_BASE = 4096;

  // Weight word widths (N*P*weight bits) and the widest of them.
  localparam int L1_WW = L1_N * L1_P * 8;
  localparam int L2_WW = L2_N * L2_P * 2;
  localparam int L3_WW = L3_N * L3_P * 1;
  localparam int L4_WW = L4_N * L4_P * 8;
  localparam int MAX_WW = L4_WW;

endpackage
