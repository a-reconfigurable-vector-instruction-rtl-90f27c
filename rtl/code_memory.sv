// code_memory: the dedicated instruction memory of one core (Harvard
// organisation: instructions and data never share a memory).
//
// CODE_DEPTH words of 32 bits with a synchronous read port: the instruction
// at raddr appears on rdata one clock later. The program is meant to be fixed
// when the core is built; it can be given as a hex file (INIT_FILE) or
// written through the loading port (we, waddr, wdata) before the core is
// started. The loading port is this design's addition.
module code_memory #(
  parameter int unsigned CODE_DEPTH = 256,
  parameter string       INIT_FILE  = "",
  localparam int unsigned AW        = $clog2(CODE_DEPTH)
) (
  input  logic          clk,
  input  logic [AW-1:0] raddr,
  output logic [31:0]   rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata
);
  logic [31:0] mem [CODE_DEPTH];

  initial begin
    for (int i = 0; i < int'(CODE_DEPTH); i++) mem[i] = '0;
    if (INIT_FILE != "") $readmemh(INIT_FILE, mem);
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
