// aoc_pkg: types and helper functions shared by every layer block of the
// stream-based line-buffer CNN accelerator.
//
// Activations and weights are 8-bit signed integers (the accelerator runs
// CNNs quantised to 8-10 bits; this RTL fixes 8 bits). Partial sums and
// accumulators are 32-bit, biases 16-bit. requant() turns an accumulator
// back into an activation: arithmetic right shift, optional ReLU, and
// saturation to the 8-bit range. The shift/ReLU/saturate scheme is this
// design's own choice; the quantisation arithmetic is not specified.
package aoc_pkg;

  localparam int unsigned DW    = 8;   // activation width
  localparam int unsigned WW    = 8;   // weight width
  localparam int unsigned BW    = 16;  // bias width
  localparam int unsigned ACCW  = 32;  // accumulator / partial-sum width

  typedef logic signed [DW-1:0]   act_t;
  typedef logic signed [WW-1:0]   wgt_t;
  typedef logic signed [BW-1:0]   bias_t;
  typedef logic signed [ACCW-1:0] acc_t;

  // Index width of a non-zero weight inside a block of BLK channels.
  function automatic int unsigned idx_w(input int unsigned blk);
    return (blk > 1) ? $clog2(blk) : 1;
  endfunction

  // Accumulator -> activation: shift, optional ReLU, saturate.
  function automatic act_t requant(input acc_t a, input int unsigned shift,
                                   input bit relu);
    acc_t s;
    s = a >>> shift;
    if (relu && s < 0) return '0;
    if (s > acc_t'(127)) return act_t'(127);
    if (s < acc_t'(-128)) return act_t'(-128);
    return act_t'(s);
  endfunction

endpackage
