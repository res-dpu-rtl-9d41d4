// resdpu_pkg: constants and types shared by the REP-DPIM macro.
//
// The macro is a 256 x 64 bit SRAM array (16 Kb) split into 16 column groups of
// four bit columns. Each group is a stack of 32 sub-banks (SBNK) of 8 rows x 4
// columns; each SBNK column of 8 cells is one resource-shared DPU. Geometry
// numbers follow the paper; ACC_W and the mode encoding are this design's own.
// Derived sizes: COLS / SBNK_DPUS = 16 column groups, ROWS / DPU_CELLS = 32
// sub-banks (and activations) per column group.
package resdpu_pkg;
  localparam int unsigned ROWS         = 256;  // array rows (word lines)
  localparam int unsigned COLS         = 64;   // array bit columns
  localparam int unsigned DPU_CELLS    = 8;    // cells sharing one AND gate
  localparam int unsigned SBNK_DPUS    = 4;    // DPUs side by side in one SBNK
  localparam int unsigned ACC_IN_W     = 14;   // adder-tree result into accumulator
  localparam int unsigned ACC_W        = 40;   // accumulator width (own choice)
  localparam int unsigned MAX_PREC     = 16;   // input / weight precision limit

  // Cycle-controlled iterative approximate-accurate multiplication modes.
  // The step count is the number of input bits processed, MSB first.
  typedef enum logic [1:0] {
    MODE_EXACT    = 2'd0,   // every input bit from the leading one down
    MODE_ACCURATE = 2'd1,   // four input bits
    MODE_APPROX   = 2'd2    // three input bits
  } cia2m_mode_e;

  localparam int unsigned ACCURATE_STEPS = 4;
  localparam int unsigned APPROX_STEPS   = 3;
endpackage
