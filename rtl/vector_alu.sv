// vector_alu: the array of arithmetic functional units of one core.
//
// Holds N_ADD adder/subtractors, N_MUL multipliers and N_DIV dividers, the
// "A", "M" and "D" units of the core. Each unit has its own operand lanes; the
// ALU sequencer decides which vector elements go to which lane. The counts are
// independent compile-time parameters, which is the point of the
// architecture: a kernel dominated by division can get more dividers without
// paying for more multipliers. The defaults are the 8-8-24 mix the
// architecture was evaluated with.
//
// Timing: adders and multipliers are combinational. Dividers are sequential:
// a div_start pulse loads every lane, all lanes finish together and div_done
// (lane 0's done) pulses W+FRAC+1 clocks later with div_y valid.
module vector_alu #(
  parameter int unsigned W     = 64,
  parameter int unsigned FRAC  = 32,
  parameter int unsigned N_ADD = 8,
  parameter int unsigned N_MUL = 8,
  parameter int unsigned N_DIV = 24
) (
  input  logic                clk,
  input  logic                rst_n,
  // adder lanes
  input  logic signed [W-1:0] add_a [N_ADD],
  input  logic signed [W-1:0] add_b [N_ADD],
  input  logic                add_sub,
  output logic signed [W-1:0] add_y [N_ADD],
  // multiplier lanes
  input  logic signed [W-1:0] mul_a [N_MUL],
  input  logic signed [W-1:0] mul_b [N_MUL],
  output logic signed [W-1:0] mul_y [N_MUL],
  // divider lanes
  input  logic                div_start,
  input  logic signed [W-1:0] div_a [N_DIV],
  input  logic signed [W-1:0] div_b [N_DIV],
  output logic signed [W-1:0] div_y [N_DIV],
  output logic                div_busy,
  output logic                div_done
);
  logic [N_DIV-1:0] busy_l, done_l;

  for (genvar i = 0; i < int'(N_ADD); i++) begin : g_add
    fx_adder #(.W(W)) u_add (.a(add_a[i]), .b(add_b[i]), .sub(add_sub), .y(add_y[i]));
  end

  for (genvar i = 0; i < int'(N_MUL); i++) begin : g_mul
    fx_multiplier #(.W(W), .FRAC(FRAC)) u_mul (.a(mul_a[i]), .b(mul_b[i]), .y(mul_y[i]));
  end

  for (genvar i = 0; i < int'(N_DIV); i++) begin : g_div
    fx_divider #(.W(W), .FRAC(FRAC)) u_div (
      .clk, .rst_n, .start(div_start), .a(div_a[i]), .b(div_b[i]),
      .busy(busy_l[i]), .done(done_l[i]), .y(div_y[i])
    );
  end

  assign div_busy = busy_l[0];
  assign div_done = done_l[0];
endmodule
