// weight_bram: block RAM holding the PoT weights of the whole layer.
//
// Row t (0 <= t < DEPTH) holds filter tap t for every filter: bits
// [f*W_WIDTH +: W_WIDTH] of a row are the weight of filter f at that tap, so
// one read delivers the weights of all NUM_FILTERS units for one cycle of the
// layer.  Rows are filled through a narrow write port of WR_WIDTH bits: a
// write puts wr_data into chunk wr_chunk of row wr_row.  The read port is
// synchronous: rd_data shows the row addressed by rd_row on the cycle after
// rd_en is high, and holds otherwise.  Read and write may be used in the same
// cycle; a read of a row being written returns the old contents.
//
// That the weights sit in a block RAM follows the published test design; its
// shape (one row per tap, DEPTH = 9 for 3x3 filters) and the write port are
// this design's own choices, since the published design does not say how
// the memory is organised or loaded.  The contents are not reset.
module weight_bram #(
  parameter int unsigned NUM_FILTERS = pot_pkg::NUM_FILTERS,
  parameter int unsigned W_WIDTH     = pot_pkg::W_WIDTH,
  parameter int unsigned DEPTH       = pot_pkg::TAPS,
  parameter int unsigned WR_WIDTH    = pot_pkg::WMEM_WR_WIDTH
) (
  input  logic                                clk,
  // write port
  input  logic                                wr_en,
  input  logic [$clog2(DEPTH)-1:0]            wr_row,
  input  logic [$clog2(NUM_FILTERS*W_WIDTH/WR_WIDTH)-1:0] wr_chunk,
  input  logic [WR_WIDTH-1:0]                 wr_data,
  // read port
  input  logic                                rd_en,
  input  logic [$clog2(DEPTH)-1:0]            rd_row,
  output logic [NUM_FILTERS-1:0][W_WIDTH-1:0] rd_data
);

  localparam int unsigned CHUNKS = NUM_FILTERS * W_WIDTH / WR_WIDTH;

  logic [CHUNKS-1:0][WR_WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row][wr_chunk] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_row];
  end

  initial begin
    assert (CHUNKS * WR_WIDTH == NUM_FILTERS * W_WIDTH)
      else $error("weight_bram: row width must be a multiple of WR_WIDTH");
  end

endmodule
