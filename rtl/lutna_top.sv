// lutna_top: LUT-NA multiply-accumulate engine with mixed precision.
//
// LANES weight-stationary PEs (lutna_pe) each hold one programmed weight.
// Every cycle with in_valid, one data word per lane is multiplied by its
// lane's weight through table look-ups; the exact or the approximate
// multiplier is used according to the current layer (mp_ctrl). The
// sign-magnitude products are turned into two's complement, summed over the
// lanes and added into an ACC_W-bit accumulator, so a dot product longer than
// LANES is built from several vectors (reprogramming the weights in between).
// in_clear on a vector starts a new sum with that vector.
//
// The multipliers, their tables and the per-layer choice follow the paper.
// The lane count, the accumulation, the two-stage pipeline and all port
// protocols are this design's own; the paper describes the multiply side of
// the MAC only.
//
// Timing: stage 1 registers the lane products of a vector; stage 2 adds
// them into the accumulator. out_valid/out_acc follow in_valid by 2 cycles,
// one vector per cycle, no stalls. Weight writes (wr_*) take effect for
// vectors presented from the next cycle on. The mode used for a vector is
// the one in force in the cycle it is presented. Reset: rst_n, active low,
// synchronous.
module lutna_top
  import lutna_pkg::*;
#(
  parameter int unsigned N       = DATA_N,
  parameter int unsigned LANES   = 16,
  parameter int unsigned ACC_W   = 32,
  parameter int unsigned LAYER_W = 8,
  localparam int unsigned LANE_W = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // weight-table programming
  input  logic               wr_en,
  input  logic [LANE_W-1:0]  wr_lane,
  input  logic [1:0]         wr_entry,
  input  logic [N+1:0]       wr_data,
  input  logic               wr_sign,
  // mixed-precision control
  input  logic               cfg_we,
  input  logic [LAYER_W-1:0] cfg_boundary,
  input  logic               cfg_approx_first,
  input  logic               net_start,
  input  logic               layer_done,
  // data vectors
  input  logic               in_valid,
  input  logic               in_clear,
  input  logic [LANES-1:0]   in_sign,
  input  logic [N-1:0]       in_mag [LANES],
  // results
  output logic               out_valid,
  output logic signed [ACC_W-1:0] out_acc,
  output logic [LAYER_W-1:0] layer,
  output logic               approx
);

  localparam int unsigned PW = 2 * N + 1;  // signed product width

  mult_mode_e mode;

  mp_ctrl #(.LAYER_W(LAYER_W)) u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_boundary, .cfg_approx_first,
    .net_start, .layer_done, .layer, .approx(mode)
  );
  assign approx = (mode == MODE_APPROX);

  // ---- stage 0: look-up multipliers --------------------------------------
  logic              p_sign [LANES];
  logic [2*N-1:0]    p_mag  [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    lutna_pe #(.N(N)) u_pe (
      .clk, .rst_n,
      .wr_en    (wr_en && (wr_lane == LANE_W'(l))),
      .wr_entry, .wr_data, .wr_sign,
      .approx   (mode),
      .d_sign   (in_sign[l]),
      .d_mag    (in_mag[l]),
      .p_sign   (p_sign[l]),
      .p_mag    (p_mag[l])
    );
  end

  // ---- stage 1: product register -----------------------------------------
  logic signed [PW-1:0] prod_q [LANES];
  logic                 s1_valid, s1_clear;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_clear <= 1'b0;
      for (int l = 0; l < LANES; l++) prod_q[l] <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_clear <= in_clear;
      if (in_valid) begin
        for (int l = 0; l < LANES; l++) begin
          // sign-magnitude -> two's complement
          prod_q[l] <= p_sign[l] ? -$signed({1'b0, p_mag[l]})
                                 :  $signed({1'b0, p_mag[l]});
        end
      end
    end
  end

  // ---- stage 2: lane sum and accumulator ---------------------------------
  logic signed [ACC_W-1:0] lane_sum;

  always_comb begin
    lane_sum = '0;
    for (int l = 0; l < LANES; l++) lane_sum += ACC_W'(prod_q[l]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_acc   <= '0;
    end else begin
      out_valid <= s1_valid;
      if (s1_valid) out_acc <= s1_clear ? lane_sum : out_acc + lane_sum;
    end
  end

  // A table write must address an existing lane.
  a_wr_lane : assert property (@(posedge clk) disable iff (!rst_n)
                               wr_en |-> (int'(wr_lane) < int'(LANES)))
    else $error("lutna_top: wr_lane out of range");

endmodule
