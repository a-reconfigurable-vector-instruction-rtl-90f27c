// tb_fx_divider: checks the sequential Q32.32 divider against a 128-bit
// reference quotient, including signs, division by zero and the latency of
// W+FRAC+1 clocks from start to done.
module tb_fx_divider;
  import tb_ref_pkg::*;
  localparam int LAT = 64 + 32 + 1;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic signed [63:0] a, b, y;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fx_divider #(.W(64), .FRAC(32)) dut (.clk, .rst_n, .start, .a, .b, .busy, .done, .y);

  task automatic check(w_t ia, w_t ib);
    int cyc;
    w_t e;
    e = ref_div(ia, ib);
    @(negedge clk);
    a = ia; b = ib; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    checks += 2;
    if (y !== e) begin
      failures++;
      $display("FAIL a=%h b=%h y=%h exp=%h", ia, ib, y, e);
    end
    if (cyc != LAT) begin
      failures++;
      $display("FAIL latency %0d expected %0d", cyc, LAT);
    end
  endtask

  initial begin
    a = 0; b = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(real2fx(3.375), real2fx(1.5));
    check(real2fx(-7.0), real2fx(2.0));
    check(real2fx(1.0), real2fx(3.0));
    check(real2fx(-1.0), real2fx(-3.0));
    check(real2fx(5.0), 64'sd0);
    check(real2fx(-5.0), 64'sd0);
    for (int i = 0; i < 300; i++) begin
      w_t ra, rb;
      ra = w_t'({{16{1'b0}}, 48'({$urandom, $urandom})}) - 64'sh0000_8000_0000_0000;
      rb = w_t'({{24{1'b0}}, 40'({$urandom, $urandom})}) - 64'sh0000_0080_0000_0000;
      check(ra, rb);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
