// tb_lut_mux4: self-checking test of the 4:1 look-up selector.
// Random table contents, every select value; the expected output is the
// indexed entry. Also checks a 6-bit instance (the 4-bit multiplier width).
module tb_lut_mux4;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [1:0] sel;
  logic [9:0] e10 [4];
  logic [9:0] y10;
  logic [5:0] e6 [4];
  logic [5:0] y6;

  lut_mux4 #(.W(10)) dut10 (.sel(sel), .in_entries(e10), .y(y10));
  lut_mux4 #(.W(6))  dut6  (.sel(sel), .in_entries(e6),  .y(y6));

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < 4; i++) begin
        e10[i] = 10'($urandom);
        e6[i]  = 6'($urandom);
      end
      for (int s = 0; s < 4; s++) begin
        sel = 2'(s);
        @(posedge clk);
        checks++;
        if (y10 !== e10[s] || y6 !== e6[s]) begin
          failures++;
          if (failures < 10) $display("FAIL sel=%0d y10=%h exp=%h y6=%h exp=%h", s, y10, e10[s], y6, e6[s]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
