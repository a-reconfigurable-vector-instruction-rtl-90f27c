// tb_alu_configs: runs one grid column of the kernel loop body on cores built
// with each functional-unit mix of the architecture's evaluation
// (adders-multipliers-dividers):
//   symmetric  1-1-1, 2-2-2, 4-4-4, 8-8-8, 12-12-12, 24-24-24
//   asymmetric 24-8-8, 8-24-8, 8-8-24
// All cores get the same program and data on memories that never stall. Each
// core's results are checked against a fixed-point reference, and its run
// time against the count worked out from the instruction timings:
//   per column = 297 + 4*(3 + ceil(24/A)) + 6*(3 + ceil(24/M))
//                    + 2*(3 + 98*ceil(24/D))
// (297 clocks of loads, stores, scalar work and branch). The clock counts are
// printed as a table; they show the same trend as the published latencies:
// the dividers, being sequential, dominate.
module tb_alu_configs;
  import tb_ref_pkg::*;
  import vp_pkg::*;
  localparam int VLEN = 24;
  localparam int NCFG = 9;
  localparam int CA [NCFG] = '{1, 2, 4, 8, 12, 24, 24, 8, 8};
  localparam int CM [NCFG] = '{1, 2, 4, 8, 12, 24, 8, 24, 8};
  localparam int CD [NCFG] = '{1, 2, 4, 8, 12, 24, 8, 8, 24};
  logic clk = 0, rst_n = 0, start = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic prog_we = 0;
  logic [7:0] prog_addr = 0;
  logic [31:0] prog_data = 0;
  logic halted [NCFG];

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    logic running, mem_req, mem_we, mem_gnt, mem_rvalid;
    logic [15:0] mem_addr;
    logic [63:0] mem_wdata, mem_rdata;
    int stalls;
    vector_core #(.N_ADD(CA[g]), .N_MUL(CM[g]), .N_DIV(CD[g])) dut (
      .clk, .rst_n, .start, .halted(halted[g]), .running, .prog_we, .prog_addr, .prog_data,
      .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata);
    tb_data_memory #(.STALL_PCT(0), .DEPTH(256)) mem (.clk, .req(mem_req), .we(mem_we),
      .addr(mem_addr), .wdata(mem_wdata), .gnt(mem_gnt), .rvalid(mem_rvalid),
      .rdata(mem_rdata), .stalls);
  end

  instr_t prog [$];
  w_t in_fx [5][VLEN];
  w_t k_fx;
  logic [63:0] image [256];
  logic [63:0] result [NCFG][VLEN];

  // one column, same body as the end-to-end test
  task automatic build_program();
    prog.push_back(mk_i(OP_VLDF, 0, 0, 16'd0));
    prog.push_back(mk_i(OP_VLDF, 1, 0, 16'd24));
    prog.push_back(mk_i(OP_VLDF, 2, 0, 16'd48));
    prog.push_back(mk_i(OP_VLDF, 3, 0, 16'd72));
    prog.push_back(mk_i(OP_VLDF, 4, 0, 16'd96));
    prog.push_back(mk_i(OP_SLDF, 5, 0, 16'd200));
    prog.push_back(mk_r(OP_VMUL, 5, 0, 1));
    prog.push_back(mk_r(OP_VMUL, 6, 2, 3));
    prog.push_back(mk_r(OP_VADD, 5, 5, 6));
    prog.push_back(mk_r(OP_VDIV, 5, 5, 4));
    prog.push_back(mk_r(OP_VMULS, 6, 0, 5));
    prog.push_back(mk_r(OP_VMUL, 6, 6, 6));
    prog.push_back(mk_r(OP_VSUB, 6, 6, 5));
    prog.push_back(mk_r(OP_VMUL, 7, 1, 2));
    prog.push_back(mk_r(OP_VMUL, 7, 7, 4));
    prog.push_back(mk_r(OP_VDIV, 6, 6, 7));
    prog.push_back(mk_r(OP_VSUB, 0, 0, 0));
    prog.push_back(mk_r(OP_VSUB, 7, 0, 6));
    prog.push_back(mk_i(OP_VSTF, 7, 0, 16'd128));
    prog.push_back(mk_i(OP_SLI, 2, 0, 16'd0));   // stands in for the loop counter update
    prog.push_back(mk_i(OP_BNZ, 2, 0, 16'd0));
    prog.push_back(mk_r(OP_HALT, 0, 0, 0));
  endtask

  function automatic int cdiv(int a, int b);
    return (a + b - 1) / b;
  endfunction

  // loads 5*51 + 5, store 27, SLI 2, BNZ 2, HALT 2 + 1 clock for halted
  function automatic int expected(int a, int m, int d);
    return 5 * 51 + 5 + 27 + 2 + 2 + 3
           + 4 * (3 + cdiv(VLEN, a)) + 6 * (3 + cdiv(VLEN, m)) + 2 * (3 + 98 * cdiv(VLEN, d));
  endfunction

  int cycles [NCFG];

  initial begin
    int cyc, n_done;
    build_program();
    for (int i = 0; i < 256; i++) image[i] = 0;
    for (int v = 0; v < 5; v++)
      for (int e = 0; e < VLEN; e++) begin
        in_fx[v][e] = real2fx(0.5 + real'($urandom % (7 * 2048)) / 4096.0);
        image[v * VLEN + e] = $realtobits(fx2real(in_fx[v][e]));
      end
    k_fx = real2fx(0.5 + real'($urandom % (7 * 2048)) / 4096.0);
    image[200] = $realtobits(fx2real(k_fx));
    for (int i = 0; i < 256; i++) begin
      g_cfg[0].mem.mem[i] = image[i]; g_cfg[1].mem.mem[i] = image[i];
      g_cfg[2].mem.mem[i] = image[i]; g_cfg[3].mem.mem[i] = image[i];
      g_cfg[4].mem.mem[i] = image[i]; g_cfg[5].mem.mem[i] = image[i];
      g_cfg[6].mem.mem[i] = image[i]; g_cfg[7].mem.mem[i] = image[i];
      g_cfg[8].mem.mem[i] = image[i];
    end
    for (int g = 0; g < NCFG; g++) cycles[g] = 0;
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
    cyc = 1;
    n_done = 0;
    while (n_done < NCFG && cyc < 20000) begin
      @(negedge clk);
      cyc++;
      for (int g = 0; g < NCFG; g++)
        if (halted[g] && cycles[g] == 0) begin cycles[g] = cyc; n_done++; end
    end
    for (int e = 0; e < VLEN; e++) begin
      result[0][e] = g_cfg[0].mem.mem[128 + e]; result[1][e] = g_cfg[1].mem.mem[128 + e];
      result[2][e] = g_cfg[2].mem.mem[128 + e]; result[3][e] = g_cfg[3].mem.mem[128 + e];
      result[4][e] = g_cfg[4].mem.mem[128 + e]; result[5][e] = g_cfg[5].mem.mem[128 + e];
      result[6][e] = g_cfg[6].mem.mem[128 + e]; result[7][e] = g_cfg[7].mem.mem[128 + e];
      result[8][e] = g_cfg[8].mem.mem[128 + e];
    end
    $display("config (A-M-D)   clocks per column");
    for (int g = 0; g < NCFG; g++) begin
      $display("  %2d-%2d-%2d        %0d", CA[g], CM[g], CD[g], cycles[g]);
      checks++;
      if (cycles[g] != expected(CA[g], CM[g], CD[g])) begin
        failures++;
        $display("FAIL config %0d-%0d-%0d took %0d clocks, expected %0d", CA[g], CM[g], CD[g],
                 cycles[g], expected(CA[g], CM[g], CD[g]));
      end
      for (int e = 0; e < VLEN; e++) begin
        w_t a, b, c, d, ee, t, q;
        real yr, got, tol;
        a = in_fx[0][e]; b = in_fx[1][e]; c = in_fx[2][e]; d = in_fx[3][e]; ee = in_fx[4][e];
        t = ref_div(ref_mul(a, b) + ref_mul(c, d), ee);
        q = ref_mul(k_fx, a);
        q = ref_div(ref_mul(q, q) - t, ref_mul(ref_mul(b, c), ee));
        yr = fx2real(-q);
        got = $bitstoreal(result[g][e]);
        tol = (yr < 0 ? -yr : yr) * (2.0 ** -52);
        checks++;
        if (got - yr > tol || yr - got > tol) begin
          failures++;
          $display("FAIL config %0d elem %0d got %g exp %g", g, e, got, yr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
