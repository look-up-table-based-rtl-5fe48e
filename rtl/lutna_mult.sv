// lutna_mult: exact divide-and-conquer look-up-table multiplier (LUT-NA).
//
// Multiplies a sign-magnitude weight by a sign-magnitude data word without a
// multiplier array. The N-bit data magnitude is cut into N/2 slices of two
// bits. Slice k selects, through its own 4:1 mux tree (lut_mux4), one of the
// four pre-computed products w*00..w*11 held in the weight table; this is the
// partial product Z_k (N+2 bits). The partial products are added with Z_k
// moved k*2 bits to the left (for N=8: Z3*2^6 + Z2*2^4 + Z1*2^2 + Z0), which
// costs no logic beyond the adder itself. The sign of the product is the XOR
// of the two sign bits. All of this follows the paper's 4-bit and 8-bit
// examples; writing the adder rows as one behavioural sum is this design's
// choice.
//
// Interface: entries from lut_store_full (or any table with the same
// contents), w_sign, d_sign, d_mag in; p_sign and the 2N-bit magnitude p_mag
// out. Purely combinational; the result is exact.
module lutna_mult #(
  parameter int unsigned N = lutna_pkg::DATA_N
) (
  input  logic [N+1:0]   entries [4],
  input  logic           w_sign,
  input  logic           d_sign,
  input  logic [N-1:0]   d_mag,
  output logic           p_sign,
  output logic [2*N-1:0] p_mag
);

  localparam int unsigned SLICES = N / 2;

  logic [N+1:0] z [SLICES];

  for (genvar k = 0; k < SLICES; k++) begin : g_slice
    lut_mux4 #(.W(N + 2)) u_mux (
      .sel        (d_mag[2*k+1 -: 2]),
      .in_entries (entries),
      .y          (z[k])
    );
  end

  // Shifted sum of the partial products. The true product of two N-bit
  // magnitudes fits in 2N bits, so the wider sum is truncated without loss.
  always_comb begin
    logic [2*N+1:0] acc;
    acc = '0;
    for (int k = 0; k < SLICES; k++) begin
      acc += (2*N+2)'(z[k]) << (2 * k);
    end
    p_mag = acc[2*N-1:0];
  end

  assign p_sign = w_sign ^ d_sign;

  initial begin
    assert (N % 2 == 0 && N >= 2) else $fatal(1, "lutna_mult: N must be even");
  end

endmodule
