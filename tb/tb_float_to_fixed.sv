// tb_float_to_fixed: checks binary64 -> Q32.32 conversion on values that are
// exact in both formats (compared with the simulator's own real conversion),
// on truncation of extra fraction bits, and on saturation, NaN and zero.
module tb_float_to_fixed;
  import tb_ref_pkg::*;
  logic [63:0] f;
  logic signed [63:0] x;
  int checks = 0, failures = 0;

  float_to_fixed #(.W(64), .FRAC(32)) dut (.f, .x);

  task automatic check(logic [63:0] fi, w_t e);
    f = fi;
    #1;
    checks++;
    if (x !== e) begin
      failures++;
      $display("FAIL f=%h (%g) x=%h exp=%h", fi, $bitstoreal(fi), x, e);
    end
  endtask

  initial begin
    check($realtobits(1.0), 64'sh0000_0001_0000_0000);
    check($realtobits(-2.5), -64'sh0000_0002_8000_0000);
    check($realtobits(0.0), 64'sd0);
    check($realtobits(1.0 + 2.0**-40), 64'sh0000_0001_0000_0000);     // truncated
    check($realtobits(-(1.0 + 2.0**-40)), -64'sh0000_0001_0000_0000); // toward zero
    check($realtobits(2.0**-33), 64'sd0);
    check($realtobits(2.0**40), 64'sh7FFF_FFFF_FFFF_FFFF);             // saturates
    check($realtobits(-(2.0**40)), 64'sh8000_0000_0000_0000);
    check(64'h7FF0_0000_0000_0000, 64'sh7FFF_FFFF_FFFF_FFFF);         // +inf
    check(64'h7FF8_0000_0000_0001, 64'sd0);                           // NaN
    for (int i = 0; i < 2000; i++) begin
      w_t v;
      // at most 52 significant bits, so the value is exact in binary64
      v = w_t'({{12{1'b0}}, 52'({$urandom, $urandom})}) - 64'sh0008_0000_0000_0000;
      check($realtobits(fx2real(v)), v);
    end
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
