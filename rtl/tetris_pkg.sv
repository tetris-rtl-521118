// tetris_pkg: sizes and shared types of the Tetris split-and-accumulate (SAC)
// accelerator.
//
// A kneaded weight is a 16-bit word w' in which bit b is an "essential" (1) bit
// borrowed from one of KS original weights, together with a pointer p_b per bit
// that names which of the KS activations of the current window that bit belongs
// to. In int8 mode the same word carries two 8-bit kneaded weights: bits [7:0]
// with pointers p_0..p_7 form the lower one, bits [15:8] with p_8..p_15 the upper.
//
// A lane's queue entry also carries two flags: win_last (the entry is the last
// kneaded weight of its activation window) and pass (the pass mark: the entry
// closes the addable A/W pairs of the current output).
//
// Numbers that follow the paper: 16-bit weights (16 splitters and 16 segment
// adders per SAC unit), kneading stride KS = 16 (4-bit pointers), 16 PEs.
// The activation width (16), the segment-register width (32) and the queue
// depths are this design's own choices.
package tetris_pkg;

  // Weight bit length: one segment adder / register per weight bit.
  localparam int unsigned WBITS    = 16;
  // Kneading stride: number of original weights kneaded together.
  localparam int unsigned KS_DFLT  = 16;

  // Lanes (splitters) per SAC unit.
  localparam int unsigned NLANES   = 16;
  // PEs (SAC units) in the accelerator.
  localparam int unsigned NPE      = 16;
  // Activation width (signed fixed point 16).
  localparam int unsigned ABITS    = 16;
  // Width of one splitter output: an activation or its negation.
  localparam int unsigned SPLIT_W  = ABITS + 1;
  // Segment register width.
  localparam int unsigned SEG_W    = 32;
  // Partial-sum width after the shift-and-add: SEG_W + WBITS.
  localparam int unsigned PSUM_W   = SEG_W + WBITS;

  // Operating precision of the weights.
  typedef enum logic {
    MODE_FP16 = 1'b0,
    MODE_INT8 = 1'b1
  } mode_e;

endpackage
