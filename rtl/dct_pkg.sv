// dct_pkg -- constants shared by the pruned 8-point transform units.
//
// The transform takes 8 input samples and keeps only the 4 lowest-frequency
// outputs of an 8-point approximate DCT (rows 0..3 of the modified rounded
// DCT matrix). A 2-D block is therefore 8x8 samples in and 4x4 coefficients
// out. The helper functions give the word growth of one 1-D pass: the DC
// output is the sum of all 8 inputs, so 3 extra bits make the pass exact.
// The point counts follow the paper; the widths are this design's choice.
package dct_pkg;

  localparam int unsigned N_PTS  = 8;  // input points of the 1-D transform
  localparam int unsigned N_KEEP = 4;  // outputs kept after pruning
  localparam int unsigned GROWTH = 3;  // log2(N_PTS): bits added by one pass

  // Output width of one exact 1-D pass over IN_W-bit signed samples.
  function automatic int unsigned pass_width(int unsigned in_w);
    return in_w + GROWTH;
  endfunction

endpackage
