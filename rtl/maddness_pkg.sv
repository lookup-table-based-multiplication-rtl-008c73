// maddness_pkg: constants and types shared by the lookup-table accelerator.
//
// The accelerator replaces a multiply-accumulate by a table lookup: each compute
// block sorts its input subvector into one of 16 prototypes with a 4-level
// binary decision tree, reads the precomputed INT8 dot product of that prototype
// from a 16-row SRAM table, and adds it to a running sum that is kept in
// carry-save form (sum word S plus carry word C) as it ripples from block to
// block. Only at the end of the chain is S + 2*C resolved by a ripple-carry adder.
//
// Widths that follow the paper: 8-bit LUT entries, 16-row tables, 16-bit
// carry-save accumulation with a 15-bit carry word, 4-level tree of 15
// comparators, 8-bit comparator operands. The default array size (16 decoders
// per block, 32 blocks) is the configuration the paper presents as its main one.
package maddness_pkg;

  // Array size (paper: N_dec = 16 decoders per block, N_S = 32 pipeline stages).
  localparam int unsigned N_DEC_DEFAULT = 16;
  localparam int unsigned N_S_DEFAULT   = 32;

  localparam int unsigned LUT_W    = 8;   // INT8 precomputed dot products
  localparam int unsigned LUT_ROWS = 16;  // one row per prototype
  localparam int unsigned ROW_AW   = 4;   // row address width
  localparam int unsigned ACC_W    = 16;  // carry-save accumulator width
  localparam int unsigned X_W      = 8;   // comparator operand width
  localparam int unsigned TREE_LVL = 4;   // levels of the decision tree
  localparam int unsigned N_DLC    = 15;  // comparators in the tree

  // Carry-save partial sum passed from one compute block to the next.
  // The value it stands for is s + (c << 1), modulo 2**ACC_W.
  typedef struct packed {
    logic [ACC_W-1:0] s;
    logic [ACC_W-2:0] c;
  } cs_t;

  localparam cs_t CS_ZERO = '0;

  // Resolve a carry-save word to a plain two's-complement number (reference model).
  function automatic logic [ACC_W-1:0] cs_value(cs_t v);
    return v.s + {v.c, 1'b0};
  endfunction

endpackage
