// tb_load_store_unit: the load/store unit against the behavioural data memory
// and a model of both register files. Runs vector and scalar loads and stores
// with and without float conversion; checks the data moved, the conversion,
// and the cycle counts 2*VLEN+1 (vector load) and VLEN+1 (vector store) with
// a memory that never stalls. A second unit, on a memory that stalls at
// random, must move the same data.
module tb_load_store_unit;
  import tb_ref_pkg::*;
  import vp_pkg::*;
  localparam int VLEN = 24;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  // command, shared by both units
  logic     start [2];
  ls_kind_e kind;
  logic     fconv;
  logic [15:0] addr;
  logic [3:0]  reg_idx;
  logic signed [63:0] sdata;

  logic busy [2], done [2], vwe [2], swe [2];
  logic [3:0] vreg [2], swa [2];
  logic [4:0] vidx [2];
  logic signed [63:0] vwd [2], vrd [2], swd [2];
  logic mem_req [2], mem_we [2], mem_gnt [2], mem_rvalid [2];
  logic [15:0] mem_addr [2];
  logic [63:0] mem_wdata [2], mem_rdata [2];
  int stalls [2];

  // register file models
  logic signed [63:0] vregs [2][8][VLEN];
  logic signed [63:0] sregs [2][16];

  for (genvar u = 0; u < 2; u++) begin : g_u
    load_store_unit dut (.clk, .rst_n, .start(start[u]), .kind, .fconv, .addr, .reg_idx, .sdata,
      .busy(busy[u]), .done(done[u]), .vwe(vwe[u]), .vreg(vreg[u]), .vidx(vidx[u]), .vwd(vwd[u]),
      .vrd(vrd[u]), .swe(swe[u]), .swa(swa[u]), .swd(swd[u]),
      .mem_req(mem_req[u]), .mem_we(mem_we[u]), .mem_addr(mem_addr[u]), .mem_wdata(mem_wdata[u]),
      .mem_gnt(mem_gnt[u]), .mem_rvalid(mem_rvalid[u]), .mem_rdata(mem_rdata[u]));
    tb_data_memory #(.STALL_PCT(u == 0 ? 0 : 40)) mem (.clk, .req(mem_req[u]), .we(mem_we[u]),
      .addr(mem_addr[u]), .wdata(mem_wdata[u]), .gnt(mem_gnt[u]), .rvalid(mem_rvalid[u]),
      .rdata(mem_rdata[u]), .stalls(stalls[u]));
    assign vrd[u] = vregs[u][vreg[u][2:0]][vidx[u]];
    always @(posedge clk) begin
      if (vwe[u]) vregs[u][vreg[u][2:0]][vidx[u]] <= vwd[u];
      if (swe[u]) sregs[u][swa[u]] <= swd[u];
    end
  end

  function automatic logic [63:0] mrd(int u, int a);
    return (u == 0) ? g_u[0].mem.mem[a] : g_u[1].mem.mem[a];
  endfunction

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Run one command on both units; return the cycle count of unit 0.
  task automatic cmd(ls_kind_e k, logic fc, int a, int r, w_t sd, output int cyc0);
    int cyc;
    @(negedge clk);
    kind = k; fconv = fc; addr = 16'(a); reg_idx = 4'(r); sdata = sd;
    start[0] = 1; start[1] = 1;
    @(negedge clk);
    start[0] = 0; start[1] = 0;
    cyc = 1; cyc0 = 0;
    while (!(done[0] || cyc0 != 0) || !(done[1])) begin
      if (done[0] && cyc0 == 0) cyc0 = cyc;
      @(negedge clk);
      cyc++;
      if (cyc > 2000) break;
    end
    if (cyc0 == 0) cyc0 = cyc;
  endtask

  initial begin
    int cyc;
    w_t v;
    start[0] = 0; start[1] = 0; kind = LS_VLOAD; fconv = 0; addr = 0; reg_idx = 0; sdata = 0;
    for (int u = 0; u < 2; u++) begin
      for (int r = 0; r < 8; r++) for (int e = 0; e < VLEN; e++) vregs[u][r][e] = 0;
      for (int r = 0; r < 16; r++) sregs[u][r] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // memory contents: fixed-point words at 100.., doubles at 200..
    for (int e = 0; e < VLEN; e++) begin
      v = w_t'({{12{1'b0}}, 52'({$urandom, $urandom})}) - 64'sh0008_0000_0000_0000;
      g_u[0].mem.mem[100 + e] = v; g_u[1].mem.mem[100 + e] = v;
      g_u[0].mem.mem[200 + e] = $realtobits(fx2real(v) * 2.0);
      g_u[1].mem.mem[200 + e] = $realtobits(fx2real(v) * 2.0);
    end
    // vector load, fixed point
    cmd(LS_VLOAD, 0, 100, 3, 0, cyc);
    chk(cyc == 2 * VLEN + 1, $sformatf("vector load latency %0d", cyc));
    for (int u = 0; u < 2; u++) for (int e = 0; e < VLEN; e++)
      chk(vregs[u][3][e] == w_t'(g_u[0].mem.mem[100 + e]), $sformatf("u%0d vload e%0d", u, e));
    // vector load with float conversion
    cmd(LS_VLOAD, 1, 200, 5, 0, cyc);
    for (int u = 0; u < 2; u++) for (int e = 0; e < VLEN; e++)
      chk(vregs[u][5][e] == (vregs[u][3][e] <<< 1), $sformatf("u%0d vloadf e%0d", u, e));
    // vector store, fixed point and float
    cmd(LS_VSTORE, 0, 300, 5, 0, cyc);
    chk(cyc == VLEN + 1, $sformatf("vector store latency %0d", cyc));
    cmd(LS_VSTORE, 1, 400, 3, 0, cyc);
    for (int u = 0; u < 2; u++) for (int e = 0; e < VLEN; e++) begin
      chk(w_t'(mrd(u, 300 + e)) == vregs[u][5][e], $sformatf("u%0d vstore e%0d", u, e));
      chk(mrd(u, 400 + e) == $realtobits(fx2real(vregs[u][3][e])), $sformatf("u%0d vstoref e%0d", u, e));
    end
    // scalar load/store
    cmd(LS_SLOAD, 1, 207, 9, 0, cyc);
    chk(cyc == 3, $sformatf("scalar load latency %0d", cyc));
    for (int u = 0; u < 2; u++) chk(sregs[u][9] == (vregs[u][3][7] <<< 1), "scalar loadf");
    cmd(LS_SSTORE, 1, 500, 0, real2fx(-6.25), cyc);
    cmd(LS_SSTORE, 0, 501, 0, real2fx(1.5), cyc);
    for (int u = 0; u < 2; u++) begin
      chk(mrd(u, 500) == $realtobits(-6.25), "scalar storef");
      chk(mrd(u, 501) == 64'(real2fx(1.5)), "scalar store");
    end
    chk(stalls[1] > 0, "stalling memory stalled");
    $display("memory stall cycles: %0d", stalls[1]);
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
