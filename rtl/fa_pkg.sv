// fa_pkg: constants and types shared by the FlashAttention-2 / ExpMul kernel.
//
// The fixed-point format of the Log2Exp step follows the paper's description:
// a 16-bit two's-complement number with 6 integer bits (sign included) and 10
// fraction bits, enough for the clipped argument X in [-15, 0] after it is
// multiplied by log2(e), i.e. for the range [-21.64, 0]. The clip bound 15 is
// the paper's. The 5-bit width of the shift amount L follows from that range
// (L <= 22). The pipeline tag and the controller state encoding are this
// design's own choices.
package fa_pkg;

  // Log2Exp fixed-point format: Q6.10
  localparam int unsigned FIX_W    = 16;
  localparam int unsigned FIX_FRAC = 10;
  localparam int unsigned CLIP_MAG = 15;   // X is clipped to [-15, 0]
  localparam int unsigned L_W      = 5;    // L = Log2Exp(X) in [0, 22]

  // Sideband that travels with a key/value pair through the pipeline.
  typedef struct packed {
    logic valid;   // a key/value pair is present
    logic first;   // i == 1: restart max and accumulator
    logic last;    // i == N: the accumulator holds o*_N afterwards
  } tag_t;

  typedef enum logic [1:0] {
    ST_IDLE   = 2'd0,
    ST_STREAM = 2'd1,
    ST_DRAIN  = 2'd2
  } ctrl_state_t;

endpackage
