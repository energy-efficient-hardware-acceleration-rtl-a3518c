// act_bram: block RAM holding the input feature map (activations).
//
// A simple dual-port memory of DEPTH words of A_WIDTH bits: one write port to
// load the activations and one synchronous read port from which the
// controller streams them to the layer.  rd_data shows the word at rd_addr on
// the cycle after rd_en is high and holds otherwise; a read of a word being
// written returns the old contents.  The feature map is stored row by row:
// pixel (y, x) is at address y*IMG_W + x.
//
// That the activations sit in a block RAM follows the published test design;
// the depth (one 7x7 map by default), the row-major layout and the write port
// are this design's own choices.  The contents are not reset.
module act_bram #(
  parameter int unsigned A_WIDTH = pot_pkg::A_WIDTH,
  parameter int unsigned DEPTH   = pot_pkg::IMG_W * pot_pkg::IMG_H
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [A_WIDTH-1:0]       wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [A_WIDTH-1:0]       rd_data
);

  logic [A_WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
