// tb_data_memory: behavioural model of the external data memory used by the
// testbenches. Word-addressed, 64-bit words. A request is granted in the same
// cycle unless a stall is drawn (probability STALL_PCT percent); read data
// come back with rvalid one clock after the grant. stalls counts the cycles a
// request waited.
module tb_data_memory #(
  parameter int unsigned AW        = 16,
  parameter int unsigned DEPTH     = 4096,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic          clk,
  input  logic          req,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [63:0]   wdata,
  output logic          gnt,
  output logic          rvalid,
  output logic [63:0]   rdata,
  output int            stalls
);
  logic [63:0] mem [DEPTH];
  logic        stall;

  initial begin
    for (int i = 0; i < int'(DEPTH); i++) mem[i] = '0;
    rvalid = 1'b0;
    rdata  = '0;
    stalls = 0;
    stall  = 1'b0;
  end

  always @(negedge clk) stall = (STALL_PCT != 0) && (($urandom % 100) < STALL_PCT);

  assign gnt = req && !stall;

  always @(posedge clk) begin
    rvalid <= 1'b0;
    if (req && !gnt) stalls <= stalls + 1;
    if (gnt) begin
      if (we) mem[int'(addr) % DEPTH] <= wdata;
      else begin
        rdata  <= mem[int'(addr) % DEPTH];
        rvalid <= 1'b1;
      end
    end
  end
endmodule
