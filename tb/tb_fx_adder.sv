// tb_fx_adder: checks the fixed-point adder/subtractor against plain integer
// arithmetic on edge values and random operands.
module tb_fx_adder;
  logic signed [63:0] a, b, y, exp;
  logic               sub;
  int checks = 0, failures = 0;

  fx_adder #(.W(64)) dut (.a, .b, .sub, .y);

  task automatic check(logic signed [63:0] ia, logic signed [63:0] ib, logic is_sub);
    a = ia; b = ib; sub = is_sub;
    #1;
    exp = is_sub ? ia - ib : ia + ib;
    checks++;
    if (y !== exp) begin
      failures++;
      $display("FAIL %s a=%h b=%h y=%h exp=%h", is_sub ? "sub" : "add", ia, ib, y, exp);
    end
  endtask

  initial begin
    check(64'sd0, 64'sd0, 0);
    check(64'h0000_0001_8000_0000, 64'h0000_0002_4000_0000, 0);  // 1.5 + 2.25
    check(64'h0000_0001_8000_0000, 64'h0000_0002_4000_0000, 1);  // 1.5 - 2.25
    check(64'h7FFF_FFFF_FFFF_FFFF, 64'sd1, 0);                   // wraps
    check(-64'sd5, -64'sd7, 1);
    for (int i = 0; i < 2000; i++) check({$urandom, $urandom}, {$urandom, $urandom}, 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
