// alutna_mult: approximate divide-and-conquer multiplier (A-LUT-NA).
//
// The N-bit data magnitude is split into an upper half d[N-1:N/2] and a lower
// half d[N/2-1:0]. If the upper half is non-zero, only the upper half is
// multiplied and the lower half's product is taken as 0; if the upper half is
// zero, the lower half is multiplied, which is then exact. Each half is
// handled by N/4 mux trees (one for N=4, two for N=8) reading the
// storage-optimized weight table, and, for N=8, one adder that combines the
// two partial products with a 2-bit offset. The half-selection and the
// approximation rule (lower product fixed at 0) follow the paper. Sharing one
// set of mux trees between the two cases, with a 2:1 steering of the data
// slices and a final shift of N/2 bits when the upper half was used, is this
// design's choice; the paper's mux and adder counts leave this steering out.
//
// Interface as lutna_mult. Purely combinational. The result equals
// w * (d with its lower half cleared) when d[N-1:N/2] != 0, else w * d.
module alutna_mult #(
  parameter int unsigned N = lutna_pkg::DATA_N
) (
  input  logic [N+1:0]   entries [4],
  input  logic           w_sign,
  input  logic           d_sign,
  input  logic [N-1:0]   d_mag,
  output logic           p_sign,
  output logic [2*N-1:0] p_mag
);

  localparam int unsigned H      = N / 2;  // bits per half
  localparam int unsigned SLICES = H / 2;  // mux trees

  logic         use_hi;
  logic [H-1:0] half;
  logic [N+1:0] z [SLICES];

  assign use_hi = |d_mag[N-1:H];
  assign half   = use_hi ? d_mag[N-1:H] : d_mag[H-1:0];

  for (genvar k = 0; k < SLICES; k++) begin : g_slice
    lut_mux4 #(.W(N + 2)) u_mux (
      .sel        (half[2*k+1 -: 2]),
      .in_entries (entries),
      .y          (z[k])
    );
  end

  always_comb begin
    logic [2*N+1:0] zsum;
    zsum = '0;
    for (int k = 0; k < SLICES; k++) begin
      zsum += (2*N+2)'(z[k]) << (2 * k);
    end
    // Place the half-product: upper half weighs 2^H, lower half 2^0.
    if (use_hi) p_mag = zsum[2*N-1:0] << H;
    else        p_mag = zsum[2*N-1:0];
  end

  assign p_sign = w_sign ^ d_sign;

  initial begin
    assert (N % 4 == 0 && N >= 4) else $fatal(1, "alutna_mult: N must be a multiple of 4");
  end

endmodule
