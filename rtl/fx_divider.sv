// fx_divider: sequential fixed-point divider, one "D" unit of the vector ALU.
//
// Computes a / b for Q(W-FRAC).FRAC operands. The dividend magnitude is
// widened to W+FRAC bits (|a| shifted left by FRAC) and divided by |b| with a
// restoring radix-2 algorithm, one quotient bit per clock, W+FRAC clocks in
// all. The sign is applied at the end, so the quotient truncates toward zero;
// quotient bits above W are dropped. Division by zero returns the most
// positive or most negative word, following the dividend's sign.
//
// Timing: start is sampled in a cycle where busy is low; busy is then high for
// ITER = W+FRAC cycles and done pulses for one cycle in the cycle after the
// last iteration, with y valid from then until the next start. Latency from
// start to done is ITER+1 clocks.
//
// The architecture makes its divider a sequential unit; the algorithm, its
// rounding and the division-by-zero result are choices of this design.
module fx_divider #(
  parameter int unsigned W    = 64,
  parameter int unsigned FRAC = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] y
);
  localparam int unsigned ITER = W + FRAC;
  localparam int unsigned CW   = $clog2(ITER + 1);

  logic [ITER-1:0] dividend;   // shifts left, quotient bits enter at bit 0
  logic [W:0]      rem;        // partial remainder, one guard bit
  logic [W-1:0]    divisor;
  logic            neg;
  logic            by_zero;
  logic [CW-1:0]   count;

  logic [W:0]   rem_shift;
  logic [W:0]   rem_sub;

  always_comb begin
    rem_shift = {rem[W-1:0], dividend[ITER-1]};
    rem_sub   = rem_shift - {1'b0, divisor};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dividend <= '0;
      rem      <= '0;
      divisor  <= '0;
      neg      <= 1'b0;
      by_zero  <= 1'b0;
      count    <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
      y        <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          dividend <= {(a[W-1] ? W'(-a) : W'(a)), FRAC'(0)};
          divisor  <= b[W-1] ? W'(-b) : W'(b);
          neg      <= a[W-1] ^ b[W-1];
          by_zero  <= (b == '0);
          rem      <= '0;
          count    <= CW'(ITER);
          busy     <= 1'b1;
        end
      end else begin
        if (rem_sub[W]) begin
          rem      <= rem_shift;
          dividend <= {dividend[ITER-2:0], 1'b0};
        end else begin
          rem      <= rem_sub;
          dividend <= {dividend[ITER-2:0], 1'b1};
        end
        count <= count - 1'b1;
        if (count == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
      if (busy && count == CW'(1)) begin
        if (by_zero)
          y <= neg ? {1'b1, {(W-1){1'b0}}} : {1'b0, {(W-1){1'b1}}};
        else if (neg)
          y <= -$signed(W'({dividend[ITER-2:0], ~rem_sub[W]}));
        else
          y <= W'({dividend[ITER-2:0], ~rem_sub[W]});
      end
    end
  end
endmodule
