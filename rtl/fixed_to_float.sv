// fixed_to_float: signed fixed point to IEEE-754 binary64, the store side of
// the load/store unit's converter.
//
// Takes the magnitude of the W-bit word, finds its leading one, normalises so
// that the leading one is dropped as the hidden bit, and sets the exponent to
// (leading-one position - FRAC + 1023). Significand bits beyond 52 are
// truncated toward zero. Zero gives +0.0. Purely combinational. The rounding
// rule is a choice of this design; the architecture only states that the
// converter works in both directions.
module fixed_to_float #(
  parameter int unsigned W    = 64,
  parameter int unsigned FRAC = 32
) (
  input  logic signed [W-1:0] x,
  output logic [63:0]         f
);
  logic [W-1:0] mag;
  logic [W-1:0] norm;
  int           msb;
  logic [10:0]  e;
  logic [51:0]  frac;

  always_comb begin
    mag = x[W-1] ? W'(-x) : W'(x);
    msb = 0;
    for (int i = 0; i < int'(W); i++)
      if (mag[i]) msb = i;
    norm = mag << (W - 1 - msb);
    e    = 11'(msb - int'(FRAC) + 1023);
    frac = '0;
    for (int i = 0; i < 52; i++)
      if (int'(W) - 2 - i >= 0) frac[51-i] = norm[W-2-i];
    if (mag == '0) f = '0;
    else f = {x[W-1], e, frac};
  end
endmodule
