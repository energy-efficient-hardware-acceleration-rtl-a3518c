// bac_layer: one convolution layer built from NUM_FILTERS bitshift-accumulate
// units, one per filter.
//
// All units share the clock, the enable, the accumulator reset and the
// single input activation a_in; each unit gets its own PoT weight from
// w_in[f].  Streaming the KSIZE*KSIZE activations of one input window
// together with, each cycle, the weight of the same tap for every filter
// computes the window's result for all filters at once: out[f] is the signed
// accumulator of filter f.  Timing is that of bac_unit: the sum of the last
// tap shows on out one cycle after the cycle following that tap, i.e.
// KSIZE*KSIZE+1 cycles after the first tap.
//
// The unit count (512), the shared activation and per-filter weight inputs,
// and the clock/enable/reset controls follow the published layer.  The
// output bus being a packed array of raw accumulators is this design's
// choice.
module bac_layer #(
  parameter int unsigned        NUM_FILTERS = pot_pkg::NUM_FILTERS,
  parameter int unsigned        A_WIDTH     = pot_pkg::A_WIDTH,
  parameter int unsigned        W_WIDTH     = pot_pkg::W_WIDTH,
  parameter int unsigned        ACC_WIDTH   = pot_pkg::ACC_WIDTH,
  parameter logic [W_WIDTH-1:0] ZERO_WEIGHT = {1'b0, {(W_WIDTH-1){1'b1}}}
) (
  input  logic                                  clk,
  input  logic                                  rst,
  input  logic                                  en,
  input  logic [NUM_FILTERS-1:0][W_WIDTH-1:0]   w_in,
  input  logic [A_WIDTH-1:0]                    a_in,
  output logic [NUM_FILTERS-1:0][ACC_WIDTH-1:0] out
);

  for (genvar f = 0; f < NUM_FILTERS; f++) begin : g_unit
    bac_unit #(
      .A_WIDTH    (A_WIDTH),
      .W_WIDTH    (W_WIDTH),
      .ACC_WIDTH  (ACC_WIDTH),
      .ZERO_WEIGHT(ZERO_WEIGHT)
    ) u_bac (
      .clk (clk),
      .rst (rst),
      .en  (en),
      .w_in(w_in[f]),
      .a_in(a_in),
      .out (out[f])
    );
  end

endmodule
