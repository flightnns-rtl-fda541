// pow2_shift_unit -- the LightNN-1 "multiplier": one activation times one
// signed power-of-two weight term, done with a single shift and an optional
// negation instead of a multiplier.
//
// Purely combinational. act is an 8-bit signed activation; code is the
// 4-bit term {sign, e} (see flightnn_pkg). prod = (-1)^sign * act * 2^-e,
// returned exactly as a 15-bit signed number with 6 fraction bits more than
// act. Code e = 7 gives zero. Replacing the multiply with a shift is the
// paper's idea; the code layout and the exact-product format are this
// design's choices.
module pow2_shift_unit
  import flightnn_pkg::*;
(
  input  logic signed [ACT_W-1:0]  act,
  input  wcode_t                   code,
  output logic signed [PROD_W-1:0] prod
);

  logic signed [PROD_W-1:0] act_wide;
  logic signed [PROD_W-1:0] shifted;
  logic [EXP_W-1:0]         lsh;     // left-shift amount 6 - e

  always_comb begin
    act_wide = PROD_W'(act);
    // barrel shift: left by (6 - e) so that the smallest term keeps all bits
    lsh      = EXP_W'(PROD_FRAC) - code.e;
    shifted  = act_wide <<< lsh;
    if (code.e == EXP_ZERO) prod = '0;
    else if (code.sign)     prod = -shifted;
    else                    prod = shifted;
  end

endmodule
