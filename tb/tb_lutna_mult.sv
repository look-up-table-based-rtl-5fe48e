// tb_lutna_mult: self-checking test of the exact LUT multiplier.
// The table holds w*0..w*3 computed here. Every 8-bit weight/data pair and
// every 4-bit pair is tried, with random signs; the product must equal w*d
// and the sign the XOR of the operand signs.
module tb_lutna_mult;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [9:0]  ent8 [4];
  logic [5:0]  ent4 [4];
  logic        ws, ds, ps8, ps4;
  logic [7:0]  d8;
  logic [3:0]  d4;
  logic [15:0] pm8;
  logic [7:0]  pm4;

  lutna_mult #(.N(8)) dut8 (.entries(ent8), .w_sign(ws), .d_sign(ds), .d_mag(d8), .p_sign(ps8), .p_mag(pm8));
  lutna_mult #(.N(4)) dut4 (.entries(ent4), .w_sign(ws), .d_sign(ds), .d_mag(d4), .p_sign(ps4), .p_mag(pm4));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < 256; w++) begin
      for (int k = 0; k < 4; k++) begin
        ent8[k] = 10'(w * k);
        ent4[k] = 6'((w % 16) * k);
      end
      for (int d = 0; d < 256; d++) begin
        ws = 1'($urandom); ds = 1'($urandom);
        d8 = 8'(d); d4 = 4'(d % 16);
        #1;
        checks++;
        if (pm8 !== 16'(w * d) || ps8 !== (ws ^ ds) ||
            pm4 !== 8'((w % 16) * (d % 16)) || ps4 !== (ws ^ ds)) begin
          failures++;
          if (failures < 10) $display("FAIL w=%0d d=%0d p8=%0d p4=%0d", w, d, pm8, pm4);
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
