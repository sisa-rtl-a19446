// sisa_pkg: types and constants shared by the scale-in systolic array.
//
// The array is SISA_ROWS x SISA_COLS processing elements cut into SISA_NUM_SLABS horizontal
// slabs of SISA_SLAB_H rows each (128 x 128, 8 slabs of 16 rows, BF16 operands, as
// in the reference configuration). Operands are bfloat16, accumulators are
// IEEE-754 binary32 (the accumulator width is a choice of this design).
// Local buffer depth (SISA_KT = 128 elements per bank half) is derived from the
// 8 KB / 64 KB slab buffer sizes: 16 lanes x 2 halves x 128 x 2 B = 8 KB and
// 128 lanes x 2 halves x 128 x 2 B = 64 KB.
package sisa_pkg;

  typedef logic [15:0] bf16_t;
  typedef logic [31:0] fp32_t;

  localparam int unsigned SISA_ROWS = 128;
  localparam int unsigned SISA_COLS = 128;
  localparam int unsigned SISA_SLAB_H = 16;
  localparam int unsigned SISA_NUM_SLABS = SISA_ROWS / SISA_SLAB_H;
  localparam int unsigned SISA_KT = 128;

  // Slab configuration chosen per M tile (Fig. 4 of the reference design).
  typedef enum logic [1:0] {
    CFG_INDEPENDENT = 2'd0,  // every slab runs its own N tile
    CFG_FUSED       = 2'd1,  // slabs fused into groups of 2 or 4
    CFG_MONOLITHIC  = 2'd2   // all slabs fused into one array
  } slab_cfg_e;

  localparam fp32_t FP32_QNAN = 32'h7fc0_0000;

endpackage
