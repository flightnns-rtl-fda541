// flightnn_pkg -- types, widths and arithmetic shared by the FLightNN
// convolution engine.
//
// A FLightNN weight is a sum of k_i signed powers of two, where k_i is
// chosen per filter (0, 1 or 2). Each power-of-two term is stored as a
// 4-bit code (the 4-bit LightNN-1 weight): one sign bit and a 3-bit
// right-shift amount e, value (-1)^sign * 2^-e for e = 0..6. The code
// e = 7 stands for a zero term; the quantizer's rounding function can
// return zero for a zero residual, and 4 bits leave no other place for it.
// This code layout is this design's choice; the 4-bit term width and the
// 8-bit activations follow the paper's LightNN-1 (4-bit weights, 8-bit
// activations) configuration.
//
// Activations are 8-bit signed fixed-point numbers. A product is kept
// exact by giving it PROD_FRAC = 6 extra fraction bits: act * 2^-e is
// act <<< (6 - e) (see pow2_shift_unit). Accumulators therefore carry 6 more fraction bits than
// the activations. No rounding or saturation happens inside the engine.
package flightnn_pkg;

  localparam int unsigned ACT_W     = 8;   // activation width (paper: 8-bit)
  localparam int unsigned CODE_W    = 4;   // one power-of-two term (paper: 4-bit L-1 weights)
  localparam int unsigned EXP_W     = CODE_W - 1;  // shift-amount field (3 bits)
  localparam int unsigned PROD_FRAC = 6;   // largest right shift kept exact
  localparam int unsigned PROD_W    = ACT_W + PROD_FRAC + 1;  // 15-bit signed product
                                                         // (-(-128) * 2^6 needs the extra bit)
  localparam logic [EXP_W-1:0] EXP_ZERO = 3'd7;            // code for a zero term

  typedef struct packed {
    logic             sign;  // 1: negative term
    logic [EXP_W-1:0] e;     // value 2^-e, e = 7 means zero
  } wcode_t;

endpackage
