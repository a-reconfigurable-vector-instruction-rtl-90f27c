// tb_code_memory: loads random words through the loading port and reads them
// back, checking the one-clock read latency.
module tb_code_memory;
  localparam int DEPTH = 256;
  logic clk = 0, we = 0;
  logic [7:0] raddr = 0, waddr = 0;
  logic [31:0] rdata, wdata = 0;
  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  code_memory dut (.clk, .raddr, .rdata, .we, .waddr, .wdata);

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 8'(i); wdata = $urandom; model[i] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int it = 0; it < 1000; it++) begin
      @(negedge clk);
      raddr = 8'($urandom);
      @(posedge clk);
      #1;
      checks++;
      if (rdata !== model[raddr]) begin failures++; $display("FAIL addr %0d", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
