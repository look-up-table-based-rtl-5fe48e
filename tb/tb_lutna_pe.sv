// tb_lutna_pe: self-checking test of one processing element.
// Programs random sign-magnitude weights through the table write port
// (w*0..w*3, computed here), then applies random data in both modes and
// compares with the exact product w*d and the approximate reference
// (lower half of d dropped when its upper half is non-zero).
module tb_lutna_pe;
  import lutna_pkg::*;
  localparam int N = 8;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, wr_en, wr_sign, d_sign, p_sign;
  logic [1:0] wr_entry;
  logic [N+1:0] wr_data;
  logic [N-1:0] d_mag;
  logic [2*N-1:0] p_mag;
  mult_mode_e approx;

  lutna_pe #(.N(N)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; wr_en = 0; wr_sign = 0; wr_entry = 0; wr_data = 0;
    d_sign = 0; d_mag = 0; approx = MODE_EXACT;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      int w; bit s;
      w = int'($urandom % 256); s = 1'($urandom);
      for (int k = 0; k < 4; k++) begin
        wr_en = 1'b1; wr_entry = 2'(k); wr_data = (N+2)'(w * k); wr_sign = s;
        @(posedge clk); #1;
      end
      wr_en = 1'b0;
      for (int v = 0; v < 40; v++) begin
        int d, e;
        d = int'($urandom % 256);
        d_mag = 8'(d); d_sign = 1'($urandom);
        approx = ($urandom % 2) ? MODE_APPROX : MODE_EXACT;
        e = (approx == MODE_APPROX && (d >> 4) != 0) ? w * ((d >> 4) << 4) : w * d;
        #1;
        checks++;
        if (p_mag !== 16'(e) || p_sign !== (s ^ d_sign)) begin
          failures++;
          if (failures < 10) $display("FAIL w=%0d d=%0d mode=%0d got %0d exp %0d", w, d, approx, p_mag, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
