// float_to_fixed: IEEE-754 binary64 to signed fixed point, the load side of
// the load/store unit's converter.
//
// Input data (meteorological fields) arrive in floating point while the core
// computes in fixed point, so loads may convert on the fly. The significand
// with its hidden one is shifted by (exponent - 1023 - 52 + FRAC): left when
// that is positive, right otherwise, then negated for a negative sign.
// Fractional bits beyond FRAC are truncated toward zero. Values too large for
// the word saturate to the most positive or negative word, as do infinities;
// NaN gives zero; zeros and subnormals give zero. Purely combinational.
//
// The architecture names this converter but takes it from elsewhere; the
// binary64 format and the rounding and saturation rules are choices of this
// design.
module float_to_fixed #(
  parameter int unsigned W    = 64,
  parameter int unsigned FRAC = 32
) (
  input  logic [63:0]         f,
  output logic signed [W-1:0] x
);
  localparam int BIAS_SHIFT = 1023 + 52 - FRAC;  // sh = exp - BIAS_SHIFT
  localparam int OVF_SHIFT  = W - 1 - 52;        // sh at which |value| >= 2^(W-1)

  logic        s;
  logic [10:0] e;
  logic [52:0] sig;
  int          sh;
  logic [W-1:0] mag;

  always_comb begin
    s   = f[63];
    e   = f[62:52];
    sig = {1'b1, f[51:0]};
    sh  = int'(e) - BIAS_SHIFT;
    mag = '0;
    if (e == 11'h7FF) begin
      if (f[51:0] != '0) x = '0;  // NaN
      else x = s ? {1'b1, {(W-1){1'b0}}} : {1'b0, {(W-1){1'b1}}};
    end else if (e == '0) begin
      x = '0;
    end else if (sh >= OVF_SHIFT) begin
      x = s ? {1'b1, {(W-1){1'b0}}} : {1'b0, {(W-1){1'b1}}};
    end else begin
      if (sh >= 0) mag = W'(sig) << sh;
      else if (sh > -53) mag = W'(sig >> (-sh));
      else mag = '0;
      x = s ? -$signed(mag) : $signed(mag);
    end
  end
endmodule
