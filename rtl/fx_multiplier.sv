// fx_multiplier: combinational fixed-point multiplier, one "M" unit of the
// vector ALU.
//
// Forms the full 2W-bit signed product of two Q(W-FRAC).FRAC words and keeps
// bits [W+FRAC-1:FRAC], so the result has the same format as the inputs. The
// dropped low bits truncate toward minus infinity and the dropped high bits
// wrap on overflow; both are choices of this design. Purely combinational, as
// the multipliers of the architecture are.
module fx_multiplier #(
  parameter int unsigned W    = 64,
  parameter int unsigned FRAC = 32
) (
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W-1:0] y
);
  logic signed [2*W-1:0] prod;

  always_comb begin
    prod = (2*W)'(a) * (2*W)'(b);
    y    = prod[W+FRAC-1:FRAC];
  end
endmodule
