// lut_store_full: weight table of the exact divide-and-conquer multiplier.
//
// Holds the four pre-computed products of one weight magnitude w with a 2-bit
// slice: w*00, w*01, w*10 and w*11, each N+2 bits, i.e. 4*(N+2) storage cells
// (24 for N=4, 40 for N=8). All N/2 mux trees of one multiplier read the same
// table, because every slice is multiplied by the same weight. The table
// follows the paper; the write port is this design's own: one entry per
// clock on wr_en, at wr_entry, with the value computed by the host. The
// storage cells are modelled as flip-flops and cleared by rst_n (active low,
// synchronous). Reads are combinational from the cells.
module lut_store_full #(
  parameter int unsigned N = lutna_pkg::DATA_N
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           wr_en,
  input  logic [1:0]     wr_entry,
  input  logic [N+1:0]   wr_data,
  output logic [N+1:0]   entries [4]
);

  logic [N+1:0] cells [4];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < 4; i++) cells[i] <= '0;
    end else if (wr_en) begin
      cells[wr_entry] <= wr_data;
    end
  end

  assign entries = cells;

endmodule
