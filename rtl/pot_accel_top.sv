// pot_accel_top: power-of-two convolution accelerator test design.
//
// A convolution layer of NUM_FILTERS KSIZE x KSIZE filters with 4-bit PoT
// weights and 8-bit activations, run over one IMG_H x IMG_W feature map with
// PAD pixels of zero padding.  It holds
//   * weight_bram      - all filter weights, one row per tap;
//   * act_bram         - the input feature map;
//   * layer_controller - walks the output positions and taps, reads both
//                        memories and drives the layer's enable and reset;
//   * bac_layer        - NUM_FILTERS bitshift-accumulate units fed with the
//                        same activation and each with its own weight.
// The host first loads both memories through their write ports (the
// weight port writes WR_WIDTH bits of one row at a time), then pulses start.
// For every output position the design raises out_valid for one cycle with
// the position on out_y/out_x and the signed results of all filters on
// out_data; done pulses with the last one.  Each position takes
// KSIZE*KSIZE+2 cycles (11 for 3x3), so a 7x7 map with padding 1 takes
// 49*11 cycles plus a few of latency.
//
// The layer, its 512 units and the wrapper with weight and activation BRAMs
// and control logic follow the published test design.  Its clock generator
// and its logic analyser are vendor IP and are not part of this RTL: the
// clock is an input and the results are output ports where the analyser
// would sample them.  The memory organisation, the loading ports, the
// feature-map size and the window sequencing are this design's own choices.
// rst is synchronous and active high; it resets the control and the
// accumulators but not the memory contents.
module pot_accel_top #(
  parameter int unsigned NUM_FILTERS = pot_pkg::NUM_FILTERS,
  parameter int unsigned KSIZE       = pot_pkg::KSIZE,
  parameter int unsigned IMG_W       = pot_pkg::IMG_W,
  parameter int unsigned IMG_H       = pot_pkg::IMG_H,
  parameter int unsigned PAD         = pot_pkg::PAD,
  parameter int unsigned A_WIDTH     = pot_pkg::A_WIDTH,
  parameter int unsigned W_WIDTH     = pot_pkg::W_WIDTH,
  parameter int unsigned ACC_WIDTH   = pot_pkg::ACC_WIDTH,
  parameter int unsigned WR_WIDTH    = pot_pkg::WMEM_WR_WIDTH,
  parameter logic [W_WIDTH-1:0] ZERO_WEIGHT = {1'b0, {(W_WIDTH-1){1'b1}}},
  localparam int unsigned TAPS    = KSIZE * KSIZE,
  localparam int unsigned OUT_W   = IMG_W + 2 * PAD - KSIZE + 1,
  localparam int unsigned OUT_H   = IMG_H + 2 * PAD - KSIZE + 1,
  localparam int unsigned AADR_W  = $clog2(IMG_W * IMG_H),
  localparam int unsigned TAP_W   = $clog2(TAPS),
  localparam int unsigned CHUNK_W = $clog2(NUM_FILTERS * W_WIDTH / WR_WIDTH),
  localparam int unsigned OX_W    = $clog2(OUT_W + 1),
  localparam int unsigned OY_W    = $clog2(OUT_H + 1)
) (
  input  logic                                  clk,
  input  logic                                  rst,
  // weight memory load
  input  logic                                  wmem_wr_en,
  input  logic [TAP_W-1:0]                      wmem_wr_row,
  input  logic [CHUNK_W-1:0]                    wmem_wr_chunk,
  input  logic [WR_WIDTH-1:0]                   wmem_wr_data,
  // activation memory load
  input  logic                                  amem_wr_en,
  input  logic [AADR_W-1:0]                     amem_wr_addr,
  input  logic [A_WIDTH-1:0]                    amem_wr_data,
  // control
  input  logic                                  start,
  output logic                                  busy,
  output logic                                  done,
  // results (to the logic analyser)
  output logic                                  out_valid,
  output logic [OY_W-1:0]                       out_y,
  output logic [OX_W-1:0]                       out_x,
  output logic [NUM_FILTERS-1:0][ACC_WIDTH-1:0] out_data
);

  logic                                act_rd_en;
  logic [AADR_W-1:0]                   act_rd_addr;
  logic [A_WIDTH-1:0]                  act_rd_data;
  logic                                w_rd_en;
  logic [TAP_W-1:0]                    w_rd_row;
  logic [NUM_FILTERS-1:0][W_WIDTH-1:0] w_rd_data;
  logic                                layer_rst, layer_en, pad;
  logic [A_WIDTH-1:0]                  layer_act;

  weight_bram #(
    .NUM_FILTERS(NUM_FILTERS),
    .W_WIDTH    (W_WIDTH),
    .DEPTH      (TAPS),
    .WR_WIDTH   (WR_WIDTH)
  ) u_wmem (
    .clk     (clk),
    .wr_en   (wmem_wr_en),
    .wr_row  (wmem_wr_row),
    .wr_chunk(wmem_wr_chunk),
    .wr_data (wmem_wr_data),
    .rd_en   (w_rd_en),
    .rd_row  (w_rd_row),
    .rd_data (w_rd_data)
  );

  act_bram #(
    .A_WIDTH(A_WIDTH),
    .DEPTH  (IMG_W * IMG_H)
  ) u_amem (
    .clk    (clk),
    .wr_en  (amem_wr_en),
    .wr_addr(amem_wr_addr),
    .wr_data(amem_wr_data),
    .rd_en  (act_rd_en),
    .rd_addr(act_rd_addr),
    .rd_data(act_rd_data)
  );

  layer_controller #(
    .KSIZE(KSIZE),
    .IMG_W(IMG_W),
    .IMG_H(IMG_H),
    .PAD  (PAD)
  ) u_ctrl (
    .clk        (clk),
    .rst        (rst),
    .start      (start),
    .busy       (busy),
    .done       (done),
    .act_rd_en  (act_rd_en),
    .act_rd_addr(act_rd_addr),
    .w_rd_en    (w_rd_en),
    .w_rd_row   (w_rd_row),
    .layer_rst  (layer_rst),
    .layer_en   (layer_en),
    .pad        (pad),
    .out_valid  (out_valid),
    .out_y      (out_y),
    .out_x      (out_x)
  );

  // Padding taps carry a zero activation.
  assign layer_act = pad ? '0 : act_rd_data;

  bac_layer #(
    .NUM_FILTERS(NUM_FILTERS),
    .A_WIDTH    (A_WIDTH),
    .W_WIDTH    (W_WIDTH),
    .ACC_WIDTH  (ACC_WIDTH),
    .ZERO_WEIGHT(ZERO_WEIGHT)
  ) u_layer (
    .clk (clk),
    .rst (rst || layer_rst),
    .en  (layer_en),
    .w_in(w_rd_data),
    .a_in(layer_act),
    .out (out_data)
  );

endmodule
