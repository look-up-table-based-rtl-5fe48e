// tb_alutna_mult: self-checking test of the approximate LUT multiplier.
// Reference: if the upper half of d is non-zero the lower half is dropped,
// else the product is exact:
//   p = (d >> N/2) != 0 ? w * ((d >> N/2) << N/2) : w * d
// Every 8-bit and 4-bit weight/data pair, random signs. Counts how often
// each of the two cases was exercised.
module tb_alutna_mult;
  int checks = 0, failures = 0, n_upper = 0, n_lower = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [9:0]  ent8 [4];
  logic [5:0]  ent4 [4];
  logic        ws, ds, ps8, ps4;
  logic [7:0]  d8;
  logic [3:0]  d4;
  logic [15:0] pm8;
  logic [7:0]  pm4;

  alutna_mult #(.N(8)) dut8 (.entries(ent8), .w_sign(ws), .d_sign(ds), .d_mag(d8), .p_sign(ps8), .p_mag(pm8));
  alutna_mult #(.N(4)) dut4 (.entries(ent4), .w_sign(ws), .d_sign(ds), .d_mag(d4), .p_sign(ps4), .p_mag(pm4));

  function automatic int approx_ref(int w, int d, int n);
    int h = n / 2;
    if ((d >> h) != 0) return w * ((d >> h) << h);
    return w * d;
  endfunction

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
        if ((d >> 4) != 0) n_upper++; else n_lower++;
        if (pm8 !== 16'(approx_ref(w, d, 8)) || ps8 !== (ws ^ ds) ||
            pm4 !== 8'(approx_ref(w % 16, d % 16, 4)) || ps4 !== (ws ^ ds)) begin
          failures++;
          if (failures < 10) $display("FAIL w=%0d d=%0d p8=%0d exp %0d p4=%0d exp %0d", w, d,
                                      pm8, approx_ref(w, d, 8), pm4, approx_ref(w % 16, d % 16, 4));
        end
      end
      @(posedge clk);
    end
    checks++;
    if (n_upper == 0 || n_lower == 0) failures++;
    $display("upper-half cases %0d, lower-half cases %0d", n_upper, n_lower);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
