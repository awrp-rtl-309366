// awrp_pkg: constants and types shared by the AWRP (adaptive weight ranking
// policy) replacement hardware.
//
// The default sizes below are the ones the RTL is built with. The frame size
// of 210 blocks is the largest buffer of the policy's published evaluation;
// every width is this design's own choice, because the policy is given as an
// algorithm without word sizes.
package awrp_pkg;

  // Total number of blocks (frames) in the buffer.
  localparam int unsigned BLOCKS_DEF = 210;
  // Number of sets; 1 makes the buffer fully associative.
  localparam int unsigned SETS_DEF   = 1;
  // Width of a block address (the tag stored per block).
  localparam int unsigned ADDR_W_DEF = 32;
  // Width of the access clock N and of each recency stamp R_i.
  localparam int unsigned NW_DEF     = 16;
  // Width of each frequency counter F_i (saturating).
  localparam int unsigned FW_DEF     = 16;
  // Fraction bits of the fixed-point weight W_i = F_i / (N - R_i).
  localparam int unsigned FRAC_DEF   = 16;

  // States of the per-set controller.
  typedef enum logic [1:0] {
    ST_IDLE   = 2'd0,  // waiting for a reference
    ST_LOOKUP = 2'd1,  // compare the reference with every block of the set
    ST_SCAN   = 2'd2,  // miss: weigh one block per cycle, track the lightest
    ST_FILL   = 2'd3   // replace the lightest block with the referenced one
  } set_state_e;

endpackage
