// tb_vector_regfile: random whole-register and element writes against a
// scoreboard model of the bank; checks both flattened read ports, the element
// read port, reset to zero and the element-write priority.
module tb_vector_regfile;
  localparam int VLEN = 24, NV = 8;
  logic clk = 0, rst_n = 0;
  logic [2:0] ra, rb, wa, ereg;
  logic [4:0] eidx;
  logic we, ewe;
  logic signed [63:0] va [VLEN], vb [VLEN], wd [VLEN], ewd, erd;
  logic signed [63:0] model [NV][VLEN];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  vector_regfile dut (.clk, .rst_n, .ra, .rb, .va, .vb, .we, .wa, .wd,
                      .ewe, .ereg, .eidx, .ewd, .erd);

  task automatic compare();
    for (int r = 0; r < NV; r++) begin
      ra = 3'(r); rb = 3'(NV - 1 - r);
      #1;
      for (int e = 0; e < VLEN; e++) begin
        ereg = 3'(r); eidx = 5'(e);
        #1;
        checks += 3;
        if (va[e] !== model[r][e]) begin failures++; $display("FAIL va r%0d e%0d", r, e); end
        if (vb[e] !== model[NV-1-r][e]) begin failures++; $display("FAIL vb r%0d e%0d", r, e); end
        if (erd !== model[r][e]) begin failures++; $display("FAIL erd r%0d e%0d", r, e); end
      end
    end
  endtask

  initial begin
    we = 0; ewe = 0; ra = 0; rb = 0; wa = 0; ereg = 0; eidx = 0; ewd = 0;
    for (int e = 0; e < VLEN; e++) wd[e] = 0;
    for (int r = 0; r < NV; r++) for (int e = 0; e < VLEN; e++) model[r][e] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    compare();
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      we = 1'($urandom); ewe = 1'($urandom);
      wa = 3'($urandom); ereg = ($urandom % 4 == 0) ? wa : 3'($urandom); eidx = 5'($urandom % VLEN);
      ewd = {$urandom, $urandom};
      for (int e = 0; e < VLEN; e++) wd[e] = {$urandom, $urandom};
      @(posedge clk);
      if (we) model[wa] = wd;
      if (ewe) model[ereg][eidx] = ewd;
      @(negedge clk);
      we = 0; ewe = 0;
      if (it % 20 == 0) compare();
    end
    compare();
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
