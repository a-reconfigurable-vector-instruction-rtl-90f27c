// tb_scalar_regfile: random writes and reads of the scalar registers against a
// model, including reset values and read-during-write (old value until the
// clock edge).
module tb_scalar_regfile;
  localparam int NS = 16;
  logic clk = 0, rst_n = 0;
  logic [3:0] ra, rb, wa;
  logic we;
  logic signed [63:0] da, db, wd;
  logic signed [63:0] model [NS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  scalar_regfile dut (.clk, .rst_n, .ra, .rb, .da, .db, .we, .wa, .wd);

  initial begin
    we = 0; wa = 0; wd = 0; ra = 0; rb = 0;
    for (int r = 0; r < NS; r++) model[r] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 1000; it++) begin
      @(negedge clk);
      we = 1'($urandom); wa = 4'($urandom); wd = {$urandom, $urandom};
      ra = 4'($urandom); rb = ($urandom % 3 == 0) ? wa : 4'($urandom);
      #1;
      checks += 2;
      if (da !== model[ra]) begin failures++; $display("FAIL da r%0d", ra); end
      if (db !== model[rb]) begin failures++; $display("FAIL db r%0d", rb); end
      @(posedge clk);
      if (we) model[wa] = wd;
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
