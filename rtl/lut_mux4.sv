// lut_mux4: 4:1 look-up selector of one weight-table entry.
//
// The data slice d[2k+1:2k] selects which of the four stored products
// w*00, w*01, w*10, w*11 becomes the partial product Z_k. As in the LUT-NA
// description, the 4:1 mux is a tree of three 2:1 muxes of W bits each
// (3*W 1-bit 2:1 muxes): two first-level muxes switched by sel[0] and one
// second-level mux switched by sel[1]. Which select bit drives which level is
// this design's choice. Purely combinational.
module lut_mux4 #(
  parameter int unsigned W = lutna_pkg::DATA_N + 2
) (
  input  logic [1:0]   sel,
  input  logic [W-1:0] in_entries [4],
  output logic [W-1:0] y
);

  logic [W-1:0] lvl0_lo, lvl0_hi;

  // First level: choose within {00,01} and within {10,11}.
  assign lvl0_lo = sel[0] ? in_entries[1] : in_entries[0];
  assign lvl0_hi = sel[0] ? in_entries[3] : in_entries[2];
  // Second level.
  assign y       = sel[1] ? lvl0_hi : lvl0_lo;

endmodule
