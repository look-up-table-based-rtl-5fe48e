// tb_mp_ctrl: self-checking test of the mixed-precision layer controller.
// Uses the boundaries of the evaluated networks (VGG11 n=1, VGG19 n=4 and
// GoogleNet n=69 approximate-first; ResNet18 n=36 and ResNet34 n=48
// exact-first) and walks 80 layers each, checking layer index and mode.
// Also checks counter saturation and that net_start restarts at layer 0.
module tb_mp_ctrl;
  import lutna_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, cfg_we, cfg_approx_first, net_start, layer_done;
  logic [7:0] cfg_boundary, layer;
  mult_mode_e approx;

  mp_ctrl #(.LAYER_W(8)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int exp_layer, bit exp_approx);
    checks++;
    if (layer !== 8'(exp_layer) || (approx == MODE_APPROX) !== exp_approx) begin
      failures++;
      if (failures < 10) $display("FAIL layer=%0d exp %0d approx=%0d exp %0d", layer, exp_layer, approx, exp_approx);
    end
  endtask

  task automatic run_net(int n, bit af, int layers);
    cfg_we = 1'b1; cfg_boundary = 8'(n); cfg_approx_first = af; net_start = 1'b1;
    @(posedge clk); #1 cfg_we = 1'b0; net_start = 1'b0;
    for (int l = 0; l < layers; l++) begin
      check(l, af ? (l < n) : (l >= n));
      layer_done = 1'b1; @(posedge clk); #1 layer_done = 1'b0;
      // idle cycle: layer must hold
      @(posedge clk); #1;
    end
  endtask

  initial begin
    rst_n = 1'b0; cfg_we = 0; cfg_approx_first = 0; net_start = 0; layer_done = 0; cfg_boundary = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(0, 1'b0);  // reset: exact
    run_net(1, 1'b1, 80);
    run_net(4, 1'b1, 80);
    run_net(69, 1'b1, 80);
    run_net(36, 1'b0, 80);
    run_net(48, 1'b0, 80);
    // saturation
    net_start = 1'b1; @(posedge clk); #1 net_start = 1'b0;
    layer_done = 1'b1; repeat (300) @(posedge clk); #1 layer_done = 1'b0;
    check(255, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
