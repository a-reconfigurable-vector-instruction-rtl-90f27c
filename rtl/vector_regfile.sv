// vector_regfile: the vector register bank of one core.
//
// NVREG registers of VLEN words each. Two read ports deliver whole registers
// as flattened arrays (all VLEN elements side by side) to the ALU sequencer,
// so an operation needs no element-by-element reads. The sequencer's result
// returns through a whole-register write port. The load/store unit moves data
// one element at a time through a separate element port (combinational read,
// clocked write). Reads are combinational; writes take effect at the clock
// edge. Resets to zero. If both write ports hit the same register in one
// cycle the element write wins.
//
// Flattened data paths between the bank and the sequencer, and a bank whose
// width and depth are compile-time parameters, follow the architecture; the
// number of registers (8) is this design's choice.
module vector_regfile #(
  parameter int unsigned W     = 64,
  parameter int unsigned VLEN  = 24,
  parameter int unsigned NVREG = 8,
  localparam int unsigned RW   = $clog2(NVREG),
  localparam int unsigned IW   = $clog2(VLEN)
) (
  input  logic                clk,
  input  logic                rst_n,
  // whole-register read ports
  input  logic [RW-1:0]       ra,
  input  logic [RW-1:0]       rb,
  output logic signed [W-1:0] va [VLEN],
  output logic signed [W-1:0] vb [VLEN],
  // whole-register write port
  input  logic                we,
  input  logic [RW-1:0]       wa,
  input  logic signed [W-1:0] wd [VLEN],
  // element port
  input  logic                ewe,
  input  logic [RW-1:0]       ereg,
  input  logic [IW-1:0]       eidx,
  input  logic signed [W-1:0] ewd,
  output logic signed [W-1:0] erd
);
  logic signed [W-1:0] regs [NVREG][VLEN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < int'(NVREG); r++)
        for (int e = 0; e < int'(VLEN); e++)
          regs[r][e] <= '0;
    end else begin
      if (we) regs[wa] <= wd;
      if (ewe) regs[ereg][eidx] <= ewd;
    end
  end

  assign va  = regs[ra];
  assign vb  = regs[rb];
  assign erd = regs[ereg][eidx];
endmodule
