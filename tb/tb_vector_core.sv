// tb_vector_core: end-to-end test of the core at its default configuration
// (24-element vectors, 8 adders, 8 multipliers, 24 dividers).
//
// The program processes NCOL grid columns in a loop. For each column it loads
// five input arrays of 24 levels and one scalar coefficient as binary64 values
// (converted to fixed point on load), evaluates a loop body with the operation
// mix of the convection kernel's level loop (6 multiplications, 2 divisions,
// 2 additions and one negation):
//     t = (a*b + c*d) / e
//     y = -(((k*a)^2 - t) / (b*c*e))
// and stores y as binary64 (converted on store). The equation is made up for
// the test; only its operation mix comes from the kernel.
//
// Two cores run the same program: core 0 on a memory that stalls at random,
// core 1 on one that never stalls. Results of both are checked against a
// fixed-point reference; core 1's run time is checked against the cycle count
// worked out from the instruction timings. Every mechanism of the core is
// counted and must occur: memory stalls, multi-batch add and multiply,
// divider runs, float conversion on load and on store, scalar loads, scalar
// arithmetic, scalar broadcast, branch taken and not taken, halt.
module tb_vector_core;
  import tb_ref_pkg::*;
  import vp_pkg::*;
  localparam int VLEN = 24;
  localparam int NCOL = 3;
  localparam int STRIDE = 256;
  logic clk = 0, rst_n = 0, start = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic halted [2], running [2];
  logic prog_we;
  logic [7:0] prog_addr;
  logic [31:0] prog_data;
  logic mem_req [2], mem_we [2], mem_gnt [2], mem_rvalid [2];
  logic [15:0] mem_addr [2];
  logic [63:0] mem_wdata [2], mem_rdata [2];
  int stalls [2];

  vector_core dut0 (.clk, .rst_n, .start, .halted(halted[0]), .running(running[0]),
    .prog_we, .prog_addr, .prog_data,
    .mem_req(mem_req[0]), .mem_we(mem_we[0]), .mem_addr(mem_addr[0]), .mem_wdata(mem_wdata[0]),
    .mem_gnt(mem_gnt[0]), .mem_rvalid(mem_rvalid[0]), .mem_rdata(mem_rdata[0]));
  tb_data_memory #(.STALL_PCT(25)) mem0 (.clk, .req(mem_req[0]), .we(mem_we[0]),
    .addr(mem_addr[0]), .wdata(mem_wdata[0]), .gnt(mem_gnt[0]), .rvalid(mem_rvalid[0]),
    .rdata(mem_rdata[0]), .stalls(stalls[0]));

  vector_core dut1 (.clk, .rst_n, .start, .halted(halted[1]), .running(running[1]),
    .prog_we, .prog_addr, .prog_data,
    .mem_req(mem_req[1]), .mem_we(mem_we[1]), .mem_addr(mem_addr[1]), .mem_wdata(mem_wdata[1]),
    .mem_gnt(mem_gnt[1]), .mem_rvalid(mem_rvalid[1]), .mem_rdata(mem_rdata[1]));
  tb_data_memory #(.STALL_PCT(0)) mem1 (.clk, .req(mem_req[1]), .we(mem_we[1]),
    .addr(mem_addr[1]), .wdata(mem_wdata[1]), .gnt(mem_gnt[1]), .rvalid(mem_rvalid[1]),
    .rdata(mem_rdata[1]), .stalls(stalls[1]));

  // ---------------------------------------------------------------- program
  instr_t prog [$];

  task automatic build_program();
    prog.push_back(mk_i(OP_SLI, 1, 0, 16'd0));         // s1 = column base
    prog.push_back(mk_i(OP_SLI, 4, 0, 16'(STRIDE)));   // s4 = column stride
    prog.push_back(mk_i(OP_SLI, 2, 0, 16'(NCOL)));     // s2 = columns left
    prog.push_back(mk_i(OP_SLI, 3, 0, 16'd1));         // s3 = 1
    // loop: address 4
    prog.push_back(mk_i(OP_VLDF, 0, 1, 16'd0));        // v0 = a
    prog.push_back(mk_i(OP_VLDF, 1, 1, 16'd24));       // v1 = b
    prog.push_back(mk_i(OP_VLDF, 2, 1, 16'd48));       // v2 = c
    prog.push_back(mk_i(OP_VLDF, 3, 1, 16'd72));       // v3 = d
    prog.push_back(mk_i(OP_VLDF, 4, 1, 16'd96));       // v4 = e
    prog.push_back(mk_i(OP_SLDF, 5, 1, 16'd200));      // s5 = k
    prog.push_back(mk_r(OP_VMUL, 5, 0, 1));            // v5 = a*b
    prog.push_back(mk_r(OP_VMUL, 6, 2, 3));            // v6 = c*d
    prog.push_back(mk_r(OP_VADD, 5, 5, 6));            // v5 = a*b + c*d
    prog.push_back(mk_r(OP_VDIV, 5, 5, 4));            // v5 = t
    prog.push_back(mk_r(OP_VMULS, 6, 0, 5));           // v6 = k*a
    prog.push_back(mk_r(OP_VMUL, 6, 6, 6));            // v6 = (k*a)^2
    prog.push_back(mk_r(OP_VSUB, 6, 6, 5));            // v6 = (k*a)^2 - t
    prog.push_back(mk_r(OP_VMUL, 7, 1, 2));            // v7 = b*c
    prog.push_back(mk_r(OP_VMUL, 7, 7, 4));            // v7 = b*c*e
    prog.push_back(mk_r(OP_VDIV, 6, 6, 7));            // v6 = quotient
    prog.push_back(mk_r(OP_VSUB, 0, 0, 0));            // v0 = 0
    prog.push_back(mk_r(OP_VSUB, 7, 0, 6));            // v7 = -v6
    prog.push_back(mk_i(OP_VSTF, 7, 1, 16'd128));      // y
    prog.push_back(mk_r(OP_SADD, 1, 1, 4));            // next column
    prog.push_back(mk_r(OP_SSUB, 2, 2, 3));
    prog.push_back(mk_i(OP_BNZ, 2, 0, 16'd4));
    prog.push_back(mk_r(OP_HALT, 0, 0, 0));
  endtask

  // Clocks per column with a memory that never stalls, from the instruction
  // timings: an instruction that uses a unit takes fetch + decode + the
  // unit's start-to-done latency L; one that does not takes 2.
  //   vector load  L = 2*VLEN+1   scalar load L = 3   vector store L = VLEN+1
  //   vector add/sub/mul L = 3+1 (3 batches of 8)   vector div L = 1+98
  //   scalar add/sub L = 2        branch 2
  localparam int COL_CYC = 5 * (2 + 2 * VLEN + 1) + (2 + 3) + 5 * (2 + 4) + (2 + 4)
                           + 3 * (2 + 4) + (2 + 4) + 2 * (2 + 99) + (2 + VLEN + 1)
                           + 2 * (2 + 2) + 2;
  // 4 immediates, NCOL columns, the HALT fetch and decode, and the clock in
  // which halted rises
  localparam int RUN_CYC = 4 * 2 + NCOL * COL_CYC + 3;

  // ------------------------------------------------------------- data
  w_t in_fx [NCOL][5][VLEN];
  w_t k_fx  [NCOL];

  function automatic w_t rnd_in();
    // a multiple of 2^-12 in [0.5, 4): exact in binary64 and in Q32.32
    return real2fx(0.5 + real'($urandom % (7 * 2048)) / 4096.0);
  endfunction

  task automatic put(int a, logic [63:0] v);
    mem0.mem[a] = v;
    mem1.mem[a] = v;
  endtask

  // ------------------------------------------------------------- counters
  int n_add_multi = 0, n_mul_multi = 0, n_div = 0, n_ldf = 0, n_stf = 0, n_sld = 0;
  int n_salu = 0, n_bcast = 0, n_taken = 0, n_not_taken = 0, n_halt = 0;

  always @(posedge clk) if (rst_n) begin
    // core 0 is the one whose mechanisms are counted
    if (dut0.u_seq.state == dut0.u_seq.S_RUN && dut0.u_seq.bat != 0) begin
      if (dut0.u_seq.op_q == ALU_MUL) n_mul_multi++;
      else n_add_multi++;
    end
    if (dut0.u_seq.div_start) n_div++;
    if (dut0.u_lsu.state == dut0.u_lsu.S_IDLE && dut0.u_ctrl.ls_start) begin
      if (dut0.u_ctrl.ls_fconv && dut0.u_ctrl.ls_kind == LS_VLOAD) n_ldf++;
      if (dut0.u_ctrl.ls_fconv && dut0.u_ctrl.ls_kind == LS_VSTORE) n_stf++;
      if (dut0.u_ctrl.ls_kind == LS_SLOAD) n_sld++;
    end
    if (dut0.u_ctrl.seq_start && dut0.u_ctrl.seq_src == SRC_SS) n_salu++;
    if (dut0.u_ctrl.seq_start && dut0.u_ctrl.seq_src == SRC_VS) n_bcast++;
    if (dut0.u_ctrl.state == dut0.u_ctrl.S_DECODE && dut0.u_ctrl.opc == OP_BNZ) begin
      if (dut0.u_ctrl.srf_da != 0) n_taken++;
      else n_not_taken++;
    end
    if (dut0.u_ctrl.state == dut0.u_ctrl.S_DECODE && dut0.u_ctrl.opc == OP_HALT) n_halt++;
  end

  task automatic need(int n, string what);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    int cyc, cyc1;
    prog_we = 0; prog_addr = 0; prog_data = 0;
    build_program();
    for (int c = 0; c < NCOL; c++) begin
      for (int v = 0; v < 5; v++)
        for (int e = 0; e < VLEN; e++) begin
          in_fx[c][v][e] = rnd_in();
          put(c * STRIDE + v * VLEN + e, $realtobits(fx2real(in_fx[c][v][e])));
        end
      k_fx[c] = rnd_in();
      put(c * STRIDE + 200, $realtobits(fx2real(k_fx[c])));
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (prog[i]) begin
      @(negedge clk);
      prog_we = 1; prog_addr = 8'(i); prog_data = prog[i];
    end
    @(negedge clk);
    prog_we = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1; cyc1 = 0;
    while (!(halted[0] && halted[1]) && cyc < 100000) begin
      @(negedge clk);
      cyc++;
      if (halted[1] && cyc1 == 0) cyc1 = cyc;
    end
    checks++;
    if (!(halted[0] && halted[1])) begin failures++; $display("FAIL cores did not halt"); end
    // run time of the non-stalling core
    checks++;
    $display("core 1: %0d clocks (expected %0d); core 0: %0d clocks, %0d memory stall cycles",
             cyc1, RUN_CYC, cyc, stalls[0]);
    if (cyc1 != RUN_CYC) begin failures++; $display("FAIL run time"); end
    // results
    for (int c = 0; c < NCOL; c++)
      for (int e = 0; e < VLEN; e++) begin
        w_t a, b, cc, d, ee, t, q, y;
        real yr, g0, g1, tol;
        a = in_fx[c][0][e]; b = in_fx[c][1][e]; cc = in_fx[c][2][e];
        d = in_fx[c][3][e]; ee = in_fx[c][4][e];
        t = ref_div(ref_mul(a, b) + ref_mul(cc, d), ee);
        q = ref_mul(k_fx[c], a);
        q = ref_mul(q, q) - t;
        q = ref_div(q, ref_mul(ref_mul(b, cc), ee));
        y = -q;
        yr = fx2real(y);
        g0 = $bitstoreal(mem0.mem[c * STRIDE + 128 + e]);
        g1 = $bitstoreal(mem1.mem[c * STRIDE + 128 + e]);
        tol = (yr < 0 ? -yr : yr) * (2.0 ** -52);
        checks += 2;
        if ((g0 - yr > tol) || (yr - g0 > tol)) begin
          failures++; $display("FAIL core0 col %0d elem %0d got %g exp %g", c, e, g0, yr);
        end
        if ((g1 - yr > tol) || (yr - g1 > tol)) begin
          failures++; $display("FAIL core1 col %0d elem %0d got %g exp %g", c, e, g1, yr);
        end
      end
    $display("mechanisms seen in core 0:");
    need(stalls[0], "memory stall cycles");
    need(n_add_multi, "add/sub batches after first");
    need(n_mul_multi, "mul batches after first");
    need(n_div, "divider runs");
    need(n_ldf, "vector loads with float conv");
    need(n_stf, "vector stores with float conv");
    need(n_sld, "scalar loads");
    need(n_salu, "scalar ALU instructions");
    need(n_bcast, "scalar broadcasts");
    need(n_taken, "branches taken");
    need(n_not_taken, "branches not taken");
    need(n_halt, "halts");
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
