// bnn_pkg: constants and types shared by the in-memory binarized-neural-network
// layer. The array organisation (32 word lines by 32 bit-line pairs, i.e. 1K
// synapses held in 2K resistive devices) follows the fabricated test array.
// Resistances are carried as small unsigned numbers in arbitrary units; only
// their ordering matters to the sense amplifiers, so the width and the two
// nominal values are this design's choice.
package bnn_pkg;

  // Default array size: 32 rows (WL0..WL31) by 32 columns (BL/BLb pairs).
  localparam int unsigned DEF_ROWS = 32;
  localparam int unsigned DEF_COLS = 32;

  // Width of a resistance value and nominal low/high resistance states.
  localparam int unsigned RW    = 8;
  localparam int unsigned R_LRS = 5;
  localparam int unsigned R_HRS = 100;

  typedef logic [RW-1:0] res_t;

  // Which device of a 2T2R pair a programming pulse addresses.
  typedef enum logic {
    DEV_BL  = 1'b0,
    DEV_BLB = 1'b1
  } dev_e;

  // Operating mode of the layer.
  typedef enum logic [1:0] {
    MODE_IDLE  = 2'd0,
    MODE_PROG  = 2'd1,
    MODE_INFER = 2'd2,
    MODE_READ  = 2'd3
  } mode_e;

endpackage
