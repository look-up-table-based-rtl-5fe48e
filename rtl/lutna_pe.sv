// lutna_pe: one weight-stationary LUT-NA processing element.
//
// Holds one programmable sign-magnitude weight and multiplies it by the data
// word presented each cycle. The weight magnitude lives only as pre-computed
// products: a full four-entry table for the exact multiplier (lutna_mult) and
// a storage-optimized table for the approximate one (alutna_mult). The
// per-layer mode picks which product leaves the PE. Both tables are written
// through the same port; the weight sign is stored in one more cell on every
// write.
//
// Carrying both multipliers lets one array serve the exact and the
// approximate layers of a mixed-precision network in turn. This is this
// design's choice: the paper assigns a multiplier kind per layer but gives
// no array organisation.
//
// Interface: wr_en/wr_entry/wr_data/wr_sign program the weight (one entry per
// clock, synchronous, active-low synchronous reset clears it); approx, d_sign
// and d_mag in, p_sign/p_mag out, combinational from the inputs and the
// stored weight.
module lutna_pe
  import lutna_pkg::*;
#(
  parameter int unsigned N = DATA_N
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           wr_en,
  input  logic [1:0]     wr_entry,
  input  logic [N+1:0]   wr_data,
  input  logic           wr_sign,
  input  mult_mode_e     approx,
  input  logic           d_sign,
  input  logic [N-1:0]   d_mag,
  output logic           p_sign,
  output logic [2*N-1:0] p_mag
);

  logic           w_sign;
  logic [N+1:0]   full_entries [4];
  logic [N+1:0]   opt_entries  [4];
  logic           ex_sign, ap_sign;
  logic [2*N-1:0] ex_mag,  ap_mag;

  always_ff @(posedge clk) begin
    if (!rst_n)     w_sign <= 1'b0;
    else if (wr_en) w_sign <= wr_sign;
  end

  lut_store_full #(.N(N)) u_full (
    .clk, .rst_n, .wr_en, .wr_entry, .wr_data, .entries(full_entries)
  );

  lut_store_opt #(.N(N)) u_opt (
    .clk, .rst_n, .wr_en, .wr_entry, .wr_data, .entries(opt_entries)
  );

  lutna_mult #(.N(N)) u_exact (
    .entries(full_entries), .w_sign, .d_sign, .d_mag,
    .p_sign(ex_sign), .p_mag(ex_mag)
  );

  alutna_mult #(.N(N)) u_approx (
    .entries(opt_entries), .w_sign, .d_sign, .d_mag,
    .p_sign(ap_sign), .p_mag(ap_mag)
  );

  assign p_sign = (approx == MODE_APPROX) ? ap_sign : ex_sign;
  assign p_mag  = (approx == MODE_APPROX) ? ap_mag  : ex_mag;

endmodule
