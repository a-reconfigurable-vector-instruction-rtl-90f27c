// fx_adder: combinational fixed-point adder/subtractor, one "A" unit of the
// vector ALU.
//
// Two's-complement addition of two W-bit fixed-point words; with sub set it
// computes a - b by adding the inverted b with a carry-in of one. The binary
// point does not matter for addition, so FRAC is not needed here. The result
// wraps on overflow (a choice of this design). Purely combinational, as the
// adders of the architecture are; the subtract input is the extra logic the
// architecture gives its adder.
module fx_adder #(
  parameter int unsigned W = 64
) (
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  input  logic                sub,
  output logic signed [W-1:0] y
);
  logic [W-1:0] b_eff;

  always_comb begin
    b_eff = sub ? ~b : b;
    y     = a + b_eff + W'(sub);
  end
endmodule
