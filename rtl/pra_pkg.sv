// pra_pkg: shared sizes and types of the bit-pragmatic accelerator.
//
// Neurons and synapses are 16-bit two's complement fixed-point values.  A
// neuron is fed to the datapath as a stream of oneffsets: the bit position
// (pow, 4 bits) of one essential (non-zero) bit per cycle, plus an end-of-
// neuron flag (eon).  Sixteen values contiguous along the channel dimension
// form a brick; sixteen bricks taken from sixteen adjacent windows form a
// pallet.  The 16-bit widths, 4-bit pow, 16-element brick and 16-brick pallet
// follow the paper; the accumulator width and the layer descriptor are this
// design's own choices.
package pra_pkg;

  localparam int unsigned NEURON_W = 16;  // neuron storage width
  localparam int unsigned SYN_W    = 16;  // synapse width
  localparam int unsigned POW_W    = 4;   // oneffset position width
  localparam int unsigned BRICK    = 16;  // values per brick
  localparam int unsigned ACC_W    = 48;  // partial output neuron width (own choice)

  // One oneffset as broadcast to the tiles.
  typedef struct packed {
    logic [POW_W-1:0] pow;   // position of the essential bit
    logic             eon;   // last essential bit of this neuron
  } oneffset_t;

  // Layer descriptor written by the host before start.  All counts are in
  // bricks (16 channels) where the name ends in _b.
  typedef struct packed {
    logic [11:0] nx;        // input width  (neurons)
    logic [11:0] fx;        // filter width
    logic [11:0] fy;        // filter height
    logic [11:0] ib;        // input depth in bricks (I/16)
    logic [3:0]  stride;    // S
    logic [11:0] ox;        // output width
    logic [11:0] oy;        // output height
    logic [7:0]  ng;        // filter groups (N / (tiles*16))
    logic [23:0] in_base;   // brick address of n(0,0,0) in NM
    logic [23:0] out_base;  // brick address of o(0,0,0) in NM
    logic [5:0]  out_shift; // accumulator bits dropped below the output LSB
    logic [3:0]  keep_msb;  // highest output bit kept (prefix trimming)
    logic [3:0]  keep_lsb;  // lowest output bit kept (suffix trimming)
    logic        relu;      // apply f = max(0,x)
    logic        acc_in;    // start output neurons from NBout (partial sums)
    logic        max_out;   // NBout takes max(new, NBout) instead of new
  } layer_cfg_t;

endpackage
