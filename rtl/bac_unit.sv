// bac_unit: Bitshift-and-ACcumulate processing element for power-of-two
// weights.
//
// Each enabled cycle it multiplies an unsigned activation a_in by a PoT
// weight w_in and adds the product to a signed accumulator.  The
// multiplication is a right shift: a_in >> w_in[W_WIDTH-2:0].  If w_in equals
// the reserved ZERO_WEIGHT code the partial product is forced to 0 (the
// "skip" for zero weights); otherwise the sign bit w_in[W_WIDTH-1] selects
// between the shifted value (0: add) and its negation (1: subtract), because
// the weight is sign/magnitude, not two's complement.  This is the data path
// of the published BAC schematic: shifter, zero-weight mux, negate mux and
// accumulator.
//
// Timing: two pipeline stages.  On a rising edge with en=1 the signed partial
// product is registered; on the following edge it is added to the
// accumulator.  Feeding the N*N taps of an NxN filter on N*N consecutive
// enabled cycles, the complete sum appears on `out` N*N+1 cycles after the
// first tap was clocked in.  rst (synchronous, active high) clears the
// accumulator and the pipeline register; en is ignored during rst.  out is
// the accumulator register itself.
//
// Own choices (not fixed by the published design): activations are unsigned,
// the shift is logical, the shifted-out bits are truncated, the accumulator is
// 32 bits, the partial product is the register of the first stage, and
// ZERO_WEIGHT is 4'b0111.  The zero test compares the whole 4-bit code with
// ZERO_WEIGHT, so the other free code (4'b1111) acts as -(a >> 7).
module bac_unit #(
  parameter int unsigned       A_WIDTH     = pot_pkg::A_WIDTH,
  parameter int unsigned       W_WIDTH     = pot_pkg::W_WIDTH,
  parameter int unsigned       ACC_WIDTH   = pot_pkg::ACC_WIDTH,
  parameter logic [W_WIDTH-1:0] ZERO_WEIGHT = {1'b0, {(W_WIDTH-1){1'b1}}}
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        en,
  input  logic        [W_WIDTH-1:0]   w_in,
  input  logic        [A_WIDTH-1:0]   a_in,
  output logic signed [ACC_WIDTH-1:0] out
);

  localparam int unsigned P_WIDTH = A_WIDTH + 1;  // signed partial product

  typedef struct packed {
    logic               neg;
    logic [W_WIDTH-2:0] shift;
  } weight_t;

  weight_t                    w;
  logic                       nonzero;
  logic        [A_WIDTH-1:0]  shifted;
  logic        [A_WIDTH-1:0]  magnitude;
  logic signed [P_WIDTH-1:0]  partial;

  logic signed [P_WIDTH-1:0]   partial_q;
  logic                        valid_q;
  logic signed [ACC_WIDTH-1:0] acc_q;

  // Stage 1 (combinational part): shift, zero-weight mux, sign mux.
  always_comb begin
    w         = weight_t'(w_in);
    nonzero   = (w_in != ZERO_WEIGHT);
    shifted   = a_in >> w.shift;
    magnitude = nonzero ? shifted : '0;
    partial   = w.neg ? -$signed({1'b0, magnitude}) : $signed({1'b0, magnitude});
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      partial_q <= '0;
      valid_q   <= 1'b0;
      acc_q     <= '0;
    end else begin
      valid_q <= en;
      if (en) partial_q <= partial;
      if (valid_q) acc_q <= acc_q + ACC_WIDTH'(partial_q);
    end
  end

  assign out = acc_q;

  initial begin
    assert (W_WIDTH >= 2) else $error("bac_unit: W_WIDTH must hold a sign and a shift");
    assert (ACC_WIDTH > P_WIDTH) else $error("bac_unit: accumulator narrower than a partial product");
  end

endmodule
