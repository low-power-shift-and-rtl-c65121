// lpmul_pkg: constants shared by the low-power shift-and-add multiplier.
// DEFAULT_WIDTH is the operand width of the multiplier that is evaluated
// (8 bits); DEFAULT_RING_BLOCK is the number of ring-counter flip-flops that
// share one clock gate (4, the block size of the low-power ring counter).
package lpmul_pkg;

  localparam int unsigned DEFAULT_WIDTH      = 8;
  localparam int unsigned DEFAULT_RING_BLOCK = 4;

endpackage
