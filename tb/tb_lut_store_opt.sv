// tb_lut_store_opt: self-checking test of the storage-optimized table.
// For random weights w the host writes w*0..w*3 (w*2 too, which the table
// ignores); all four wired outputs must then equal w*k exactly. Runs at
// N=8 and N=4. Also checks that a w*10 write changes nothing.
module tb_lut_store_opt;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, wr_en;
  logic [1:0] wr_entry;
  logic [9:0] wr_data8;
  logic [5:0] wr_data4;
  logic [9:0] ent8 [4];
  logic [5:0] ent4 [4];

  lut_store_opt #(.N(8)) dut8 (.clk, .rst_n, .wr_en, .wr_entry, .wr_data(wr_data8), .entries(ent8));
  lut_store_opt #(.N(4)) dut4 (.clk, .rst_n, .wr_en, .wr_entry, .wr_data(wr_data4), .entries(ent4));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(int k, int v8, int v4);
    wr_en = 1'b1; wr_entry = 2'(k); wr_data8 = 10'(v8); wr_data4 = 6'(v4);
    @(posedge clk); #1 wr_en = 1'b0;
  endtask

  task automatic compare(int w8, int w4);
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (ent8[k] !== 10'(w8 * k) || ent4[k] !== 6'(w4 * k)) begin
        failures++;
        if (failures < 10) $display("FAIL w8=%0d w4=%0d k=%0d got %0d/%0d", w8, w4, k, ent8[k], ent4[k]);
      end
    end
  endtask

  initial begin
    rst_n = 1'b0; wr_en = 1'b0; wr_entry = '0; wr_data8 = '0; wr_data4 = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    compare(0, 0);
    for (int t = 0; t < 300; t++) begin
      int w8, w4;
      w8 = (t < 256) ? t : int'($urandom % 256);
      w4 = int'($urandom % 16);
      for (int k = 0; k < 4; k++) write(k, w8 * k, w4 * k);
      compare(w8, w4);
      // a write to the wired entry must not disturb anything
      write(2, int'($urandom), int'($urandom));
      compare(w8, w4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
