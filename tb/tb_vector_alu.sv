// tb_vector_alu: drives every lane of the default 8-8-24 vector ALU with
// random operands and checks each adder, multiplier and divider lane against
// reference arithmetic, and the divider array's start-to-done latency.
module tb_vector_alu;
  import tb_ref_pkg::*;
  localparam int NA = 8, NM = 8, ND = 24;
  localparam int LAT = 64 + 32 + 1;
  logic clk = 0, rst_n = 0;
  logic signed [63:0] add_a [NA], add_b [NA], add_y [NA];
  logic signed [63:0] mul_a [NM], mul_b [NM], mul_y [NM];
  logic signed [63:0] div_a [ND], div_b [ND], div_y [ND];
  logic add_sub = 0, div_start = 0, div_busy, div_done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  vector_alu dut (.clk, .rst_n, .add_a, .add_b, .add_sub, .add_y, .mul_a, .mul_b, .mul_y,
                  .div_start, .div_a, .div_b, .div_y, .div_busy, .div_done);

  function automatic w_t rnd();
    return w_t'({{16{1'b0}}, 48'({$urandom, $urandom})}) - 64'sh0000_8000_0000_0000;
  endfunction

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int i = 0; i < ND; i++) begin div_a[i] = 0; div_b[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      int cyc;
      for (int i = 0; i < NA; i++) begin add_a[i] = rnd(); add_b[i] = rnd(); end
      for (int i = 0; i < NM; i++) begin mul_a[i] = rnd(); mul_b[i] = rnd(); end
      for (int i = 0; i < ND; i++) begin div_a[i] = rnd(); div_b[i] = rnd() >>> 8; end
      add_sub = 1'($urandom);
      #1;
      for (int i = 0; i < NA; i++)
        chk(add_y[i] == (add_sub ? add_a[i] - add_b[i] : add_a[i] + add_b[i]), $sformatf("add lane %0d", i));
      for (int i = 0; i < NM; i++)
        chk(mul_y[i] == ref_mul(mul_a[i], mul_b[i]), $sformatf("mul lane %0d", i));
      @(negedge clk);
      div_start = 1;
      @(negedge clk);
      div_start = 0;
      cyc = 1;
      while (!div_done) begin @(negedge clk); cyc++; end
      chk(cyc == LAT, $sformatf("divider latency %0d", cyc));
      for (int i = 0; i < ND; i++)
        chk(div_y[i] == ref_div(div_a[i], div_b[i]), $sformatf("div lane %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
