// lutna_pkg: constants and types shared by the LUT-NA multiplier datapath.
//
// Numbers are sign-magnitude: one sign bit plus an N-bit magnitude. The
// default magnitude width of 8 bits (9 bits with the sign) is the resolution
// found sufficient for baseline accuracy on the pruned CNNs this design
// targets. A weight table entry is N+2 bits wide: the product of an N-bit
// magnitude with a 2-bit data slice (at most 3 * (2^N - 1)).
package lutna_pkg;

  // Default magnitude width of weights and data.
  localparam int unsigned DATA_N = 8;

  // Multiplier kind used for a layer.
  typedef enum logic {
    MODE_EXACT  = 1'b0,   // full divide-and-conquer LUT multiplier
    MODE_APPROX = 1'b1    // approximate multiplier (lower half taken as 0)
  } mult_mode_e;

endpackage
