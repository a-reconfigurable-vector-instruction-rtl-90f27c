// scalar_regfile: the scalar registers of one core.
//
// NSREG fixed-point registers for the parts of a kernel that are not array
// operations (constants, loop counters, reductions). Two combinational read
// ports, one clocked write port; all registers reset to zero and all are
// writable. The set of scalar registers beside the vector bank follows the
// architecture; its size is this design's choice.
module scalar_regfile #(
  parameter int unsigned W     = 64,
  parameter int unsigned NSREG = 16,
  localparam int unsigned RW   = $clog2(NSREG)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [RW-1:0]       ra,
  input  logic [RW-1:0]       rb,
  output logic signed [W-1:0] da,
  output logic signed [W-1:0] db,
  input  logic                we,
  input  logic [RW-1:0]       wa,
  input  logic signed [W-1:0] wd
);
  logic signed [W-1:0] regs [NSREG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < int'(NSREG); r++) regs[r] <= '0;
    end else if (we) begin
      regs[wa] <= wd;
    end
  end

  assign da = regs[ra];
  assign db = regs[rb];
endmodule
