// pot_pkg: constants and types shared by the power-of-two (PoT) convolution
// accelerator.
//
// A PoT weight is a 4-bit sign/magnitude code: the top bit is the sign
// (1 = negative) and the lower three bits are a right-shift amount, so the
// weight's value is (-1)^sign * 2^-shift.  Of the 16 codes, shifts 0..6 with
// either sign give 14 non-zero levels; one of the two remaining codes
// (shift 7) is reserved as the zero weight.  The bit widths (8-bit
// activations, 4-bit weights) and the 512-filter, 3x3 layer follow the
// published design.  The accumulator width, the choice of 4'b0111 as the
// zero code and the 7x7 input feature map are this implementation's own
// choices.
package pot_pkg;

  // Datapath widths.
  localparam int unsigned A_WIDTH   = 8;   // activation bits (unsigned)
  localparam int unsigned W_WIDTH   = 4;   // PoT weight bits: sign + shift
  localparam int unsigned ACC_WIDTH = 32;  // accumulator bits (signed)

  // Layer geometry.
  localparam int unsigned NUM_FILTERS = 512;  // BAC units, one per filter
  localparam int unsigned KSIZE       = 3;    // filters are KSIZE x KSIZE
  localparam int unsigned TAPS        = KSIZE * KSIZE;

  // Input feature map held in the activation memory, and its zero padding.
  localparam int unsigned IMG_W = 7;
  localparam int unsigned IMG_H = 7;
  localparam int unsigned PAD   = 1;

  // Reserved code meaning "weight is zero": positive sign, shift 7.
  localparam logic [W_WIDTH-1:0] ZERO_WEIGHT = {1'b0, {(W_WIDTH-1){1'b1}}};

  // Field view of a PoT weight code.
  typedef struct packed {
    logic                neg;    // 1: subtract the shifted activation
    logic [W_WIDTH-2:0]  shift;  // right-shift amount applied to the activation
  } pot_weight_t;

  // Weight-memory write port granularity (bits written per access).
  localparam int unsigned WMEM_WR_WIDTH = 32;

endpackage
