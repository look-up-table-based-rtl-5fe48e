// tb_workload_conv: two small convolution layers run through the LUT-NA MAC
// engine at its default size, in both mixed-precision orders.
//
// A synthetic stand-in for the CNN layers the engine targets (the trained
// models are not part of this testbench): a 3-channel 6x6 input, layer 1
// with 4 output channels of 3x3 kernels (fan-in 27, two weight tiles of the
// 16 lanes), ReLU and requantisation to 8 bits (done in this testbench),
// then layer 2 with 2 output channels of 3x3 kernels over 4 channels (fan-in
// 36, three tiles). Weights are 60% zero, as after pruning; activations are
// skewed toward small values and zero.
//
// Pass 1 uses boundary 1, approximate first (layer 1 on the approximate
// multiplier, layer 2 exact, as chosen for VGG11). Pass 2 uses boundary 1,
// exact first (the ResNet order). Every output is compared with a reference
// convolution using the same multiplication rule per layer. The difference
// between the two passes' final outputs is printed for information.
module tb_workload_conv;
  import lutna_pkg::*;
  localparam int N = 8, LANES = 16;
  localparam int C0 = 3, H0 = 6, C1 = 4, H1 = 4, C2 = 2, H2 = 2, K = 3;
  localparam int SHIFT = 6;  // requantisation of layer-1 outputs

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, wr_en, wr_sign, cfg_we, cfg_approx_first, net_start, layer_done;
  logic [3:0] wr_lane;
  logic [1:0] wr_entry;
  logic [N+1:0] wr_data;
  logic [7:0] cfg_boundary, layer;
  logic in_valid, in_clear, out_valid, approx;
  logic [LANES-1:0] in_sign;
  logic [N-1:0] in_mag [LANES];
  logic signed [31:0] out_acc;

  lutna_top dut (.*);

  // network data (sign-magnitude)
  int  x0m [C0][H0][H0];  bit x0s [C0][H0][H0];
  int  w1m [C1][C0][K][K]; bit w1s [C1][C0][K][K];
  int  w2m [C2][C1][K][K]; bit w2s [C2][C1][K][K];
  int  x1  [C1][H1][H1];           // requantised layer-1 output (>= 0)
  longint y2 [2][C2][H2][H2];      // layer-2 output of each pass

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int mul(int w, bit ws, int d, bit ds, bit apx);
    int p;
    p = (apx && (d >> 4) != 0) ? w * ((d >> 4) << 4) : w * d;
    return (ws ^ ds) ? -p : p;
  endfunction

  function automatic int rnd_act();
    int r = int'($urandom % 10);
    if (r < 4) return 0;
    if (r < 8) return int'($urandom % 32);
    return int'($urandom % 256);
  endfunction

  function automatic int rnd_w();
    return ($urandom % 10 < 6) ? 0 : int'($urandom % 256);
  endfunction

  // one dot product of length len, split into tiles of LANES lanes
  task automatic dot(int len, int wm [], bit wsg [], int dm [], bit dsg [], output longint res);
    int tiles = (len + LANES - 1) / LANES;
    for (int t = 0; t < tiles; t++) begin
      for (int l = 0; l < LANES; l++) begin
        int i = t * LANES + l;
        int w = (i < len) ? wm[i] : 0;
        for (int k = 0; k < 4; k++) begin
          wr_en = 1'b1; wr_lane = 4'(l); wr_entry = 2'(k); wr_data = (N+2)'(w * k);
          wr_sign = (i < len) ? wsg[i] : 1'b0;
          @(posedge clk); #1;
        end
        in_mag[l]  = (i < len) ? N'(dm[i]) : '0;
        in_sign[l] = (i < len) ? dsg[i] : 1'b0;
      end
      wr_en = 1'b0;
      in_valid = 1'b1; in_clear = (t == 0);
      @(posedge clk); #1 in_valid = 1'b0; in_clear = 1'b0;
      while (!out_valid) begin @(posedge clk); #1; end
    end
    res = out_acc;
  endtask

  task automatic run_pass(int pass, bit approx_first);
    bit apx1, apx2;
    apx1 = approx_first;        // layer 0
    apx2 = !approx_first;       // layer 1 (boundary 1)
    cfg_we = 1'b1; cfg_boundary = 8'd1; cfg_approx_first = approx_first; net_start = 1'b1;
    @(posedge clk); #1 cfg_we = 1'b0; net_start = 1'b0;
    checks++;
    if (approx !== apx1) failures++;
    // layer 1
    for (int co = 0; co < C1; co++)
      for (int r = 0; r < H1; r++)
        for (int c = 0; c < H1; c++) begin
          int wm [] = new[C0*K*K]; bit wsg [] = new[C0*K*K];
          int dm [] = new[C0*K*K]; bit dsg [] = new[C0*K*K];
          longint got, ref_v = 0;
          int i = 0;
          for (int ci = 0; ci < C0; ci++)
            for (int kr = 0; kr < K; kr++)
              for (int kc = 0; kc < K; kc++) begin
                wm[i] = w1m[co][ci][kr][kc]; wsg[i] = w1s[co][ci][kr][kc];
                dm[i] = x0m[ci][r+kr][c+kc]; dsg[i] = x0s[ci][r+kr][c+kc];
                ref_v += mul(wm[i], wsg[i], dm[i], dsg[i], apx1);
                i++;
              end
          dot(C0*K*K, wm, wsg, dm, dsg, got);
          checks++;
          if (got != ref_v) begin
            failures++;
            if (failures < 10) $display("FAIL pass %0d L1 [%0d][%0d][%0d] got %0d exp %0d", pass, co, r, c, got, ref_v);
          end
          // ReLU + requantise from the reference value
          x1[co][r][c] = (ref_v <= 0) ? 0 : (((ref_v >> SHIFT) > 255) ? 255 : int'(ref_v >> SHIFT));
        end
    layer_done = 1'b1; @(posedge clk); #1 layer_done = 1'b0;
    checks++;
    if (approx !== apx2) failures++;
    // layer 2
    for (int co = 0; co < C2; co++)
      for (int r = 0; r < H2; r++)
        for (int c = 0; c < H2; c++) begin
          int wm [] = new[C1*K*K]; bit wsg [] = new[C1*K*K];
          int dm [] = new[C1*K*K]; bit dsg [] = new[C1*K*K];
          longint got, ref_v = 0;
          int i = 0;
          for (int ci = 0; ci < C1; ci++)
            for (int kr = 0; kr < K; kr++)
              for (int kc = 0; kc < K; kc++) begin
                wm[i] = w2m[co][ci][kr][kc]; wsg[i] = w2s[co][ci][kr][kc];
                dm[i] = x1[ci][r+kr][c+kc]; dsg[i] = 1'b0;
                ref_v += mul(wm[i], wsg[i], dm[i], dsg[i], apx2);
                i++;
              end
          dot(C1*K*K, wm, wsg, dm, dsg, got);
          checks++;
          if (got != ref_v) begin
            failures++;
            if (failures < 10) $display("FAIL pass %0d L2 [%0d][%0d][%0d] got %0d exp %0d", pass, co, r, c, got, ref_v);
          end
          y2[pass][co][r][c] = got;
        end
  endtask

  initial begin
    rst_n = 1'b0; wr_en = 0; wr_lane = 0; wr_entry = 0; wr_data = 0; wr_sign = 0;
    cfg_we = 0; cfg_boundary = 0; cfg_approx_first = 0; net_start = 0; layer_done = 0;
    in_valid = 0; in_clear = 0; in_sign = '0;
    for (int l = 0; l < LANES; l++) in_mag[l] = '0;
    foreach (x0m[a, b, c]) begin x0m[a][b][c] = rnd_act(); x0s[a][b][c] = 1'($urandom); end
    foreach (w1m[a, b, c, d]) begin w1m[a][b][c][d] = rnd_w(); w1s[a][b][c][d] = 1'($urandom); end
    foreach (w2m[a, b, c, d]) begin w2m[a][b][c][d] = rnd_w(); w2s[a][b][c][d] = 1'($urandom); end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    run_pass(0, 1'b1);   // VGG order: approximate first
    run_pass(1, 1'b0);   // ResNet order: exact first
    foreach (y2[0][a, b, c])
      $display("out[%0d][%0d][%0d]: approx-first %0d, exact-first %0d", a, b, c, y2[0][a][b][c], y2[1][a][b][c]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
