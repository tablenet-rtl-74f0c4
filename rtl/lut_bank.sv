// lut_bank: the look-up-table memory of one dense layer.
//
// A LUT stores precomputed results of a function; here every row holds one
// p-vector, the partial product W*x_i for one setting of the index bits. All
// the LUTs of a layer are stacked in one array: LUT number s occupies the rows
// s*2^IDX_W .. s*2^IDX_W + 2^IDX_W-1. The table contents are computed offline
// from the trained weights and written through the load port; inference only
// reads.
//
// Interface: one write port (wr_en, wr_addr, wr_data) and one read port
// (rd_en, rd_addr) with synchronous read: rd_data holds the row addressed in
// the cycle before and keeps it while rd_en is low. There is no reset: the
// array is loaded before use and rd_data is only looked at after a read, so
// the block maps onto a plain synchronous-read RAM.
module lut_bank #(
  parameter int unsigned DEPTH = 1569,   // rows
  parameter int unsigned WIDTH = 16384,  // bits per row
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_addr) < DEPTH)) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  // addresses past the last row are a caller error
  assert property (@(posedge clk) rd_en |-> 32'(rd_addr) < DEPTH)
    else $error("lut_bank: read past the last row");

endmodule
