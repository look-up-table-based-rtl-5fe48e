// lut_store_opt: storage-optimized weight table.
//
// Only 2N+2 cells are kept (10 for N=4, 18 for N=8) instead of 4*(N+2):
//   - one cell holding 0, fanned out to all bits of the w*00 input;
//   - the N bits of w*01, placed in the low N bits of the w*01 input (upper
//     two bits tied to 0);
//   - nothing for w*10: the w*01 cells are wired one bit higher, with the
//     MSB and LSB of that input tied to 0 (a 1-bit left shift);
//   - the N+1 upper bits of w*11; its LSB is the LSB of w (w*3 and w have
//     the same parity), taken from the w*01 cells.
// The wiring follows the paper. The write port is this design's own: the host
// writes the same pre-computed entries as for lut_store_full; an entry-0 write
// loads bit 0 into the zero cell, entry 1 loads the N low bits, entry 3 loads
// bits N+1..1, and entry-2 writes are ignored since that entry is wired.
// Cells are cleared by rst_n (active low, synchronous). Four output bits are
// constant 0 by construction (the upper two of w*01, MSB and LSB of w*10):
// that is the saving, not an omission.
module lut_store_opt #(
  parameter int unsigned N = lutna_pkg::DATA_N
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           wr_en,
  input  logic [1:0]     wr_entry,
  input  logic [N+1:0]   wr_data,
  output logic [N+1:0]   entries [4]
);

  logic         zero_cell;   // 1 cell
  logic [N-1:0] w1_cells;    // N cells: w*01
  logic [N:0]   w3_hi_cells; // N+1 cells: bits N+1..1 of w*11

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      zero_cell   <= 1'b0;
      w1_cells    <= '0;
      w3_hi_cells <= '0;
    end else if (wr_en) begin
      unique case (wr_entry)
        2'd0: zero_cell   <= wr_data[0];
        2'd1: w1_cells    <= wr_data[N-1:0];
        2'd3: w3_hi_cells <= wr_data[N+1:1];
        default: ;  // w*10 is formed by wiring
      endcase
    end
  end

  assign entries[0] = {(N+2){zero_cell}};
  assign entries[1] = {2'b00, w1_cells};
  assign entries[2] = {1'b0, w1_cells, 1'b0};
  assign entries[3] = {w3_hi_cells, w1_cells[0]};

endmodule
