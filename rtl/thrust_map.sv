// thrust_map: turns one network output a into a normalised motor thrust
// f = (clip(a, -1, 1) + 1) / 2, in the same fixed-point format
// (FRAC_BITS fractional bits), so 1.0 is 2^FRAC_BITS.
//
// The formula is the paper's. The halving is an arithmetic shift right,
// which rounds down like the rest of the fixed-point arithmetic (this
// design's choice). Purely combinational: f is ready in the same cycle as a.
module thrust_map
  import nn_pkg::*;
#(
  parameter int FRAC = FRAC_BITS
) (
  input  fxp_t a,
  output fxp_t f
);
  localparam fxp_t ONE = fxp_t'(1) <<< FRAC;
  fxp_t clipped;
  fxp_t shifted_up;

  always_comb begin
    if (a > ONE)        clipped = ONE;
    else if (a < -ONE)  clipped = -ONE;
    else                clipped = a;
    shifted_up = clipped + ONE;          // in [0, 2]
    f = shifted_up >>> 1;                // in [0, 1]
  end
endmodule
