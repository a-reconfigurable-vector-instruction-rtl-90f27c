// tb_alu_sequencer: runs add, sub, mul and div over whole vectors and over a
// single element (scalar use) on two sequencers: the default 8-8-24 one and a
// 5-4-2 one whose unit counts do not divide the vector length. Checks every
// result element and the done latency:
//   add/sub/mul: ceil(len/N) + 1 clocks;  div: 1 + ceil(len/N)*(W+FRAC+2).
module tb_alu_sequencer;
  import tb_ref_pkg::*;
  import vp_pkg::*;
  localparam int VLEN = 24;
  localparam int DIT  = 64 + 32 + 2;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic          start [2];
  alu_op_e       op    [2];
  logic [4:0]    len   [2];
  logic signed [63:0] va [2][VLEN];
  logic signed [63:0] vb [2][VLEN];
  logic signed [63:0] vy [2][VLEN];
  logic          busy  [2], done [2];

  alu_sequencer dut0 (.clk, .rst_n, .start(start[0]), .op(op[0]), .len(len[0]),
    .va(va[0]), .vb(vb[0]), .busy(busy[0]), .done(done[0]), .vy(vy[0]));
  alu_sequencer #(.N_ADD(5), .N_MUL(4), .N_DIV(2)) dut1 (.clk, .rst_n, .start(start[1]),
    .op(op[1]), .len(len[1]), .va(va[1]), .vb(vb[1]), .busy(busy[1]), .done(done[1]), .vy(vy[1]));

  function automatic w_t rnd();
    return w_t'({{16{1'b0}}, 48'({$urandom, $urandom})}) - 64'sh0000_8000_0000_0000;
  endfunction

  w_t sa [VLEN], sb [VLEN];

  task automatic run(int d, alu_op_e o, int n, int na, int nm, int nd);
    int cyc, b, lat;
    for (int i = 0; i < VLEN; i++) begin
      va[d][i] = rnd();
      vb[d][i] = (o == ALU_DIV) ? (rnd() >>> 6) : rnd();
      sa[i] = va[d][i];
      sb[i] = vb[d][i];
    end
    @(negedge clk);
    op[d] = o; len[d] = 5'(n); start[d] = 1;
    @(negedge clk);
    start[d] = 0;
    // operands are captured at start: disturb the inputs
    for (int i = 0; i < VLEN; i++) va[d][i] = 0;
    cyc = 1;
    while (!done[d]) begin @(negedge clk); cyc++; end
    case (o)
      ALU_ADD, ALU_SUB: begin b = (n + na - 1) / na; lat = b + 1; end
      ALU_MUL:          begin b = (n + nm - 1) / nm; lat = b + 1; end
      default:          begin b = (n + nd - 1) / nd; lat = 1 + b * DIT; end
    endcase
    checks++;
    if (cyc != lat) begin
      failures++;
      $display("FAIL dut%0d op %s len %0d latency %0d expected %0d", d, o.name(), n, cyc, lat);
    end
  endtask

  task automatic run_check(int d, alu_op_e o, int n, int na, int nm, int nd);
    w_t e;
    logic signed [63:0] prev [VLEN];
    prev = vy[d];
    run(d, o, n, na, nm, nd);
    for (int i = 0; i < VLEN; i++) begin
      if (i >= n) e = prev[i];
      else case (o)
        ALU_ADD: e = sa[i] + sb[i];
        ALU_SUB: e = sa[i] - sb[i];
        ALU_MUL: e = ref_mul(sa[i], sb[i]);
        default: e = ref_div(sa[i], sb[i]);
      endcase
      checks++;
      if (vy[d][i] !== e) begin
        failures++;
        $display("FAIL dut%0d op %s elem %0d got %h exp %h", d, o.name(), i, vy[d][i], e);
      end
    end
  endtask

  initial begin
    for (int d = 0; d < 2; d++) begin
      start[d] = 0; op[d] = ALU_ADD; len[d] = 0;
      for (int i = 0; i < VLEN; i++) begin va[d][i] = 0; vb[d][i] = 0; end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      run_check(0, ALU_ADD, VLEN, 8, 8, 24);
      run_check(0, ALU_SUB, VLEN, 8, 8, 24);
      run_check(0, ALU_MUL, VLEN, 8, 8, 24);
      run_check(0, ALU_DIV, VLEN, 8, 8, 24);
      run_check(0, ALU_MUL, 1, 8, 8, 24);
      run_check(0, ALU_DIV, 1, 8, 8, 24);
      run_check(1, ALU_ADD, VLEN, 5, 4, 2);
      run_check(1, ALU_SUB, 1, 5, 4, 2);
      run_check(1, ALU_MUL, VLEN, 5, 4, 2);
      run_check(1, ALU_DIV, VLEN, 5, 4, 2);
      run_check(1, ALU_DIV, 3, 5, 4, 2);
    end
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
