// tb_control_unit: runs a short program on the control unit alone, with the
// code memory, scalar registers, ALU sequencer and load/store unit replaced by
// simple models that answer after random delays. Checks the sequence of
// operations issued (kind, operands, address arithmetic), write-back, the
// taken and not-taken branch, the jump, HALT, and that a NOP takes 2 clocks.
module tb_control_unit;
  import tb_ref_pkg::*;
  import vp_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic halted, running;
  logic [7:0] imem_addr;
  logic [31:0] imem_data;
  logic [2:0] vrf_ra, vrf_rb, vrf_wa;
  logic [3:0] srf_ra, srf_rb, srf_wa, ls_reg;
  logic signed [63:0] srf_da, srf_db, srf_wd, seq_y0;
  logic vrf_we, srf_we, seq_start, seq_done, ls_start, ls_done, ls_fconv;
  alu_op_e seq_op;
  seq_src_e seq_src;
  ls_kind_e ls_kind;
  logic [15:0] ls_addr;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  control_unit dut (.clk, .rst_n, .start, .halted, .running, .imem_addr, .imem_data,
    .vrf_ra, .vrf_rb, .srf_ra, .srf_rb, .srf_da, .srf_db, .vrf_we, .vrf_wa, .srf_we, .srf_wa,
    .srf_wd, .seq_start, .seq_op, .seq_src, .seq_done, .seq_y0, .ls_start, .ls_kind, .ls_fconv,
    .ls_addr, .ls_reg, .ls_done);

  // code memory model, synchronous read
  instr_t prog [256];
  always @(posedge clk) imem_data <= prog[imem_addr];

  // scalar registers
  logic signed [63:0] sreg [16];
  assign srf_da = sreg[srf_ra];
  assign srf_db = sreg[srf_rb];
  always @(posedge clk) if (srf_we) sreg[srf_wa] <= srf_wd;

  string trace [$];
  int    vwrites = 0;

  // sequencer model: scalar result from the sampled operands after 1..4 clocks
  initial begin
    seq_done = 0; seq_y0 = 0;
    forever begin
      @(posedge clk);
      if (seq_start) begin
        w_t a, b;
        a = srf_da; b = srf_db;
        trace.push_back($sformatf("ALU %s %s v%0d v%0d s%0d s%0d", seq_op.name(), seq_src.name(),
                                  vrf_ra, vrf_rb, srf_ra, srf_rb));
        repeat ($urandom % 4) @(posedge clk);
        #1;
        seq_done = 1;
        case (seq_op)
          ALU_ADD: seq_y0 = a + b;
          ALU_SUB: seq_y0 = a - b;
          ALU_MUL: seq_y0 = ref_mul(a, b);
          default: seq_y0 = ref_div(a, b);
        endcase
        @(posedge clk);
        if (vrf_we) begin
          vwrites++;
          trace.push_back($sformatf("VWR v%0d", vrf_wa));
        end
        #1 seq_done = 0;
      end
    end
  end

  // load/store model
  initial begin
    ls_done = 0;
    forever begin
      @(posedge clk);
      if (ls_start) begin
        trace.push_back($sformatf("LS %s f%0d a%0d r%0d d%0d", ls_kind.name(), ls_fconv, ls_addr,
                                  ls_reg, srf_da >>> 32));
        repeat (1 + $urandom % 4) @(posedge clk);
        #1 ls_done = 1;
        @(posedge clk);
        #1 ls_done = 0;
      end
    end
  end

  string exp [$];

  initial begin
    int cyc;
    for (int i = 0; i < 256; i++) prog[i] = mk_r(OP_NOP, 0, 0, 0);
    for (int i = 0; i < 16; i++) sreg[i] = 0;
    prog[0]  = mk_i(OP_SLI, 1, 0, 16'd5);
    prog[1]  = mk_i(OP_SLI, 2, 0, 16'd2);
    prog[2]  = mk_i(OP_SLI, 3, 0, 16'd1);
    prog[3]  = mk_r(OP_VADD, 1, 2, 3);
    prog[4]  = mk_r(OP_VDIVS, 4, 5, 6);
    prog[5]  = mk_r(OP_SMUL, 7, 1, 1);
    prog[6]  = mk_i(OP_VLDF, 2, 1, 16'd10);
    prog[7]  = mk_i(OP_SST, 7, 0, 16'd40);
    prog[8]  = mk_r(OP_SSUB, 2, 2, 3);
    prog[9]  = mk_i(OP_BNZ, 2, 0, 16'd3);
    prog[10] = mk_i(OP_JMP, 0, 0, 16'd12);
    prog[11] = mk_i(OP_SLI, 9, 0, 16'd99);
    prog[12] = mk_r(OP_NOP, 0, 0, 0);
    prog[13] = mk_r(OP_HALT, 0, 0, 0);
    for (int it = 0; it < 2; it++) begin
      exp.push_back("ALU ALU_ADD SRC_VV v2 v3 s2 s3");
      exp.push_back("VWR v1");
      exp.push_back("ALU ALU_DIV SRC_VS v5 v6 s5 s6");
      exp.push_back("VWR v4");
      exp.push_back("ALU ALU_MUL SRC_SS v1 v1 s1 s1");
      exp.push_back("LS LS_VLOAD f1 a15 r2 d5");
      exp.push_back("LS LS_SSTORE f0 a40 r7 d25");
      exp.push_back($sformatf("ALU ALU_SUB SRC_SS v2 v3 s2 s3"));
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!halted && cyc < 2000) begin
      @(negedge clk);
      cyc++;
      // a NOP: the code address moves on two clocks after it was fetched
      if (imem_addr == 12) begin
        int n;
        n = 0;
        while (imem_addr == 12) begin @(negedge clk); n++; end
        checks++;
        if (n != 2) begin failures++; $display("FAIL NOP took %0d clocks", n); end
      end
    end
    checks++;
    if (!halted) begin failures++; $display("FAIL did not halt"); end
    checks++;
    if (trace.size() != exp.size()) begin
      failures++;
      $display("FAIL trace has %0d entries, expected %0d", trace.size(), exp.size());
    end
    for (int i = 0; i < trace.size() && i < exp.size(); i++) begin
      checks++;
      if (trace[i] != exp[i]) begin
        failures++;
        $display("FAIL trace[%0d] '%s' expected '%s'", i, trace[i], exp[i]);
      end
    end
    checks += 3;
    if (sreg[7] != real2fx(25.0)) begin failures++; $display("FAIL s7 %h", sreg[7]); end
    if (sreg[2] != 0) begin failures++; $display("FAIL loop counter %h", sreg[2]); end
    if (sreg[9] != 0) begin failures++; $display("FAIL jump not taken"); end
    // a second start runs the program again from address 0
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    checks++;
    if (halted) begin failures++; $display("FAIL restart"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
