// tb_fixed_to_float: checks Q32.32 -> binary64 conversion against the
// simulator's real arithmetic on exactly representable values, and the
// truncation of words with more than 53 significant bits.
module tb_fixed_to_float;
  import tb_ref_pkg::*;
  logic signed [63:0] x;
  logic [63:0] f;
  int checks = 0, failures = 0;

  fixed_to_float #(.W(64), .FRAC(32)) dut (.x, .f);

  task automatic check(w_t xi, logic [63:0] e);
    x = xi;
    #1;
    checks++;
    if (f !== e) begin
      failures++;
      $display("FAIL x=%h f=%h exp=%h", xi, f, e);
    end
  endtask

  initial begin
    check(64'sd0, 64'd0);
    check(64'sh0000_0001_0000_0000, $realtobits(1.0));
    check(-64'sh0000_0002_8000_0000, $realtobits(-2.5));
    check(64'sd1, $realtobits(2.0**-32));
    check(64'sh8000_0000_0000_0000, $realtobits(-(2.0**31)));
    // 64 significant bits: low bits are truncated
    check(64'h7FFF_FFFF_FFFF_FFFF, $realtobits(2.0**31 - 2.0**-22));
    for (int i = 0; i < 2000; i++) begin
      w_t v;
      v = w_t'({{12{1'b0}}, 52'({$urandom, $urandom})}) - 64'sh0008_0000_0000_0000;
      v = v <<< ($urandom % 11);
      check(v, $realtobits(fx2real(v)));
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
