// dwt3d_pkg: types and constants shared by the 3-D DWT datapath.
//
// The whole datapath uses one uniform two's-complement word width (14 bits,
// as in the original design). Sub-band coefficients travel with a valid bit
// so that the junk values produced by the boundary and flush steps of the
// strip schedule can be told apart from real coefficients.
//
// The 14-bit width follows the original design; the valid bit and the slot
// control word are this design's own.
package dwt3d_pkg;

  // Uniform word length of the datapath.
  localparam int unsigned WORD_W = 14;

  typedef logic signed [WORD_W-1:0] word_t;

  // One sub-band coefficient and whether it is a real one.
  typedef struct packed {
    logic  vld;
    word_t val;
  } coef_t;

  // Per-slot control that enters the pipelines together with the pixels.
  // real_slot : the slot belongs to a frame schedule (not a drain bubble)
  // first_strip / last_strip : left-boundary strip / right flush strip
  // row       : row slot inside the strip (0 .. ROWS+3)
  typedef struct packed {
    logic        real_slot;
    logic        first_strip;
    logic        last_strip;
    logic [15:0] row;
  } slot_ctl_t;

endpackage
