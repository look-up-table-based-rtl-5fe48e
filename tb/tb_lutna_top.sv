// tb_lutna_top: end-to-end test of the LUT-NA MAC engine at its default size
// (16 lanes, 8-bit magnitudes, 32-bit accumulator).
//
// Runs five small "networks", one per boundary rule of the evaluated CNNs
// (approximate-first with n = 1, 4, 2 and exact-first with n = 2, 3; the
// real boundaries are checked in tb_mp_ctrl), each with several layers. Per
// layer the weights of all lanes are programmed twice (two weight tiles of a
// dot product longer than the lane count); each tile gets a burst of
// back-to-back vectors, the first vector of the layer clearing the
// accumulator. A reference model computes every accumulator value from the
// programmed weights, the data and the expected mode of the layer; each
// result must arrive exactly 2 cycles after its vector.
//
// Mechanisms counted, each must occur: exact-mode vectors, approximate-mode
// vectors, lane products approximated (upper data half non-zero), exact
// lower-half products in approximate mode, mode switches between layers,
// accumulator clears, accumulations, negative products, weight reloads.
module tb_lutna_top;
  import lutna_pkg::*;
  localparam int N = 8, LANES = 16;

  int checks = 0, failures = 0;
  int n_exact = 0, n_approx = 0, n_approximated = 0, n_lower = 0;
  int n_switch = 0, n_clear = 0, n_accum = 0, n_neg = 0, n_reload = 0;

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

  // reference state
  int wmag [LANES];
  bit wsgn [LANES];
  longint acc_model;
  longint exp_q [$];
  int     cyc_q [$];
  int     cyc = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result monitor
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected out_valid");
      end else begin
        longint e; int c;
        e = exp_q.pop_front(); c = cyc_q.pop_front();
        if (out_acc !== 32'(e)) begin
          failures++;
          if (failures < 10) $display("FAIL acc=%0d exp %0d", out_acc, e);
        end
        checks++;
        if (cyc - c != 2) begin
          failures++;
          if (failures < 10) $display("FAIL latency %0d cycles, expected 2", cyc - c);
        end
      end
    end
  end

  task automatic program_lane(int l, int w, bit s);
    for (int k = 0; k < 4; k++) begin
      wr_en = 1'b1; wr_lane = 4'(l); wr_entry = 2'(k); wr_data = (N+2)'(w * k); wr_sign = s;
      @(posedge clk); #1;
    end
    wr_en = 1'b0;
    wmag[l] = w; wsgn[l] = s;
  endtask

  task automatic program_tile();
    for (int l = 0; l < LANES; l++)
      program_lane(l, ($urandom % 8 == 0) ? 0 : int'($urandom % 256), 1'($urandom));
    n_reload++;
  endtask

  // present one vector; the expected result is queued with its cycle
  task automatic send_vector(bit clear, bit mode_approx);
    longint sum = 0;
    for (int l = 0; l < LANES; l++) begin
      int d, p;
      // mix of small (upper half zero) and large data
      d = ($urandom % 3 == 0) ? int'($urandom % 16) : int'($urandom % 256);
      in_mag[l] = N'(d);
      in_sign[l] = 1'($urandom);
      if (mode_approx && (d >> 4) != 0) begin
        p = wmag[l] * ((d >> 4) << 4);
        if (wmag[l] != 0 && (d & 15) != 0) n_approximated++;
      end else begin
        p = wmag[l] * d;
        if (mode_approx && d != 0) n_lower++;
      end
      if (wsgn[l] ^ in_sign[l]) begin
        p = -p;
        if (p != 0) n_neg++;
      end
      sum += p;
    end
    acc_model = clear ? sum : acc_model + sum;
    if (clear) n_clear++; else n_accum++;
    if (mode_approx) n_approx++; else n_exact++;
    in_valid = 1'b1; in_clear = clear;
    exp_q.push_back(acc_model);
    // cyc counts edges; the vector is sampled at edge cyc+1, so a 2-cycle
    // latency shows out_valid at edge cyc+3, where the monitor still reads
    // cyc+2 (its own update is non-blocking).
    cyc_q.push_back(cyc);
    @(posedge clk); #1;
    in_valid = 1'b0; in_clear = 1'b0;
  endtask

  task automatic run_net(int n, bit af, int layers);
    bit prev_mode;
    cfg_we = 1'b1; cfg_boundary = 8'(n); cfg_approx_first = af; net_start = 1'b1;
    @(posedge clk); #1 cfg_we = 1'b0; net_start = 1'b0;
    for (int l = 0; l < layers; l++) begin
      bit m;
      m = af ? (l < n) : (l >= n);
      checks++;
      if (approx !== m || layer !== 8'(l)) begin
        failures++;
        $display("FAIL layer %0d mode %0d exp %0d", layer, approx, m);
      end
      if (l > 0 && m != prev_mode) n_switch++;
      prev_mode = m;
      for (int tile = 0; tile < 2; tile++) begin
        program_tile();
        for (int v = 0; v < 6; v++) send_vector(tile == 0 && v == 0, m);
      end
      layer_done = 1'b1; @(posedge clk); #1 layer_done = 1'b0;
    end
    repeat (4) @(posedge clk);
    #1;
  endtask

  initial begin
    rst_n = 1'b0; wr_en = 0; wr_lane = 0; wr_entry = 0; wr_data = 0; wr_sign = 0;
    cfg_we = 0; cfg_boundary = 0; cfg_approx_first = 0; net_start = 0; layer_done = 0;
    in_valid = 0; in_clear = 0; in_sign = '0;
    for (int l = 0; l < LANES; l++) in_mag[l] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    run_net(1, 1'b1, 4);   // VGG11-like: first layer approximate
    run_net(4, 1'b1, 5);   // VGG19-like
    run_net(2, 1'b1, 3);   // GoogleNet-like (shortened)
    run_net(2, 1'b0, 4);   // ResNet18-like (shortened): first layers exact
    run_net(3, 1'b0, 4);   // ResNet34-like (shortened)
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d results never arrived", exp_q.size());
    end
    $display("mechanisms: exact=%0d approx=%0d approximated=%0d lower_exact=%0d switch=%0d clear=%0d accumulate=%0d negative=%0d reload=%0d",
             n_exact, n_approx, n_approximated, n_lower, n_switch, n_clear, n_accum, n_neg, n_reload);
    if (n_exact == 0)        failures++;
    if (n_approx == 0)       failures++;
    if (n_approximated == 0) failures++;
    if (n_lower == 0)        failures++;
    if (n_switch == 0)       failures++;
    if (n_clear == 0)        failures++;
    if (n_accum == 0)        failures++;
    if (n_neg == 0)          failures++;
    if (n_reload == 0)       failures++;
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
