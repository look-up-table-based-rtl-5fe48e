// mp_ctrl: mixed-precision layer controller.
//
// Mixed precision runs some layers of a network on the exact LUT-NA
// multiplier and the others on the approximate one, split at a boundary
// layer n. Networks whose multiply work sits early (VGG, GoogleNet) run the
// first n layers approximately; networks whose work sits late (ResNet) run
// the first n layers exactly. This block holds n and that order, counts the
// layers, and outputs the multiplier kind for the current layer:
//   approx = approx_first ? (layer <  n) : (layer >= n)
// The rule follows the paper; the counter, its controls and its saturation
// are this design's choice.
//
// Interface: cfg_we loads cfg_boundary and cfg_approx_first; net_start resets
// the layer count to 0; layer_done advances it by one (net_start wins). All
// synchronous to clk, reset by rst_n (active low). layer and approx are
// registered-derived and valid one cycle after the control edge. After reset
// the boundary is 0 with approximate-first order, so every layer is exact.
module mp_ctrl
  import lutna_pkg::*;
#(
  parameter int unsigned LAYER_W = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_we,
  input  logic [LAYER_W-1:0] cfg_boundary,
  input  logic               cfg_approx_first,
  input  logic               net_start,
  input  logic               layer_done,
  output logic [LAYER_W-1:0] layer,
  output mult_mode_e         approx
);

  logic [LAYER_W-1:0] boundary_q;
  logic               approx_first_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      boundary_q     <= '0;
      approx_first_q <= 1'b1;  // with boundary 0: every layer exact
    end else if (cfg_we) begin
      boundary_q     <= cfg_boundary;
      approx_first_q <= cfg_approx_first;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || net_start) begin
      layer <= '0;
    end else if (layer_done && layer != '1) begin
      layer <= layer + 1'b1;
    end
  end

  always_comb begin
    logic below;
    below = (layer < boundary_q);
    approx = (approx_first_q ? below : !below) ? MODE_APPROX : MODE_EXACT;
  end

endmodule
