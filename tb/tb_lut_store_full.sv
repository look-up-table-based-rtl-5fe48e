// tb_lut_store_full: self-checking test of the full weight table.
// Checks reset to zero, random writes of every entry against a shadow copy
// kept by the testbench, and that nothing changes while wr_en is low.
module tb_lut_store_full;
  localparam int N = 8;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, wr_en;
  logic [1:0] wr_entry;
  logic [N+1:0] wr_data;
  logic [N+1:0] entries [4];
  logic [N+1:0] shadow [4];

  lut_store_full #(.N(N)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (entries[i] !== shadow[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s entry %0d = %h exp %h", what, i, entries[i], shadow[i]);
      end
    end
  endtask

  initial begin
    rst_n = 1'b0; wr_en = 1'b0; wr_entry = '0; wr_data = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < 4; i++) shadow[i] = '0;
    compare("reset");
    for (int t = 0; t < 500; t++) begin
      wr_en    = ($urandom % 4) != 0;
      wr_entry = 2'($urandom);
      wr_data  = (N+2)'($urandom);
      @(posedge clk);
      if (wr_en) shadow[wr_entry] = wr_data;
      #1 compare("write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
