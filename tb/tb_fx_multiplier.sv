// tb_fx_multiplier: checks the Q32.32 multiplier against a 128-bit reference
// product and against products of known real values.
module tb_fx_multiplier;
  import tb_ref_pkg::*;
  logic signed [63:0] a, b, y, exp;
  int checks = 0, failures = 0;

  fx_multiplier #(.W(64), .FRAC(32)) dut (.a, .b, .y);

  task automatic check(w_t ia, w_t ib, w_t e);
    a = ia; b = ib;
    #1;
    checks++;
    if (y !== e) begin
      failures++;
      $display("FAIL a=%h b=%h y=%h exp=%h", ia, ib, y, e);
    end
  endtask

  initial begin
    check(real2fx(1.5), real2fx(2.25), real2fx(3.375));
    check(real2fx(-1.5), real2fx(2.0), real2fx(-3.0));
    check(real2fx(-0.5), real2fx(-0.25), real2fx(0.125));
    check(real2fx(1000.0), real2fx(0.001953125), real2fx(1.953125));
    for (int i = 0; i < 2000; i++) begin
      w_t ra, rb;
      ra = w_t'({{16{1'b0}}, 48'({$urandom, $urandom})}) - 64'sh0000_8000_0000_0000;
      rb = w_t'({{16{1'b0}}, 48'({$urandom, $urandom})}) - 64'sh0000_8000_0000_0000;
      check(ra, rb, ref_mul(ra, rb));
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
