// vector_core: one vector instruction processing core, the top of the design.
//
// A small Harvard-style processor built to run one call of a numerical kernel
// (here: the convection parametrization of a particle dispersion model, one
// grid column per call) over arrays as long as the number of vertical levels.
// It has
//   - a code memory and a control unit that fetches whole-array instructions,
//   - a vector register bank (NVREG x VLEN words) and scalar registers,
//   - an ALU sequencer wrapping a vector ALU of N_ADD adders, N_MUL
//     multipliers and N_DIV sequential dividers; it splits each array
//     operation into batches that fit the units,
//   - a load/store unit with a floating-point to/from fixed-point converter
//     on the path to the external data memory.
// All arithmetic is signed fixed point, W bits with FRAC fractional bits.
// Independent grid columns are meant to run on several copies of this core.
//
// Interface: load a program through prog_* (or INIT_FILE), pulse start; the
// core runs from address 0 until HALT and then raises halted. The data memory
// is outside the core, on the mem_* request/grant/rvalid port described in
// load_store_unit.
//
// The block structure and its connections, the 64-bit/32-fraction number
// format, the vector length of 24 and the 8-8-24 unit mix follow the
// architecture as published; the instruction set, register counts, memory
// protocol and all timing are choices of this design.
module vector_core
  import vp_pkg::*;
#(
  parameter int unsigned W           = 64,
  parameter int unsigned FRAC        = 32,
  parameter int unsigned VLEN        = 24,
  parameter int unsigned N_ADD       = 8,
  parameter int unsigned N_MUL       = 8,
  parameter int unsigned N_DIV       = 24,
  parameter int unsigned NVREG       = 8,
  parameter int unsigned NSREG       = 16,
  parameter int unsigned CODE_DEPTH  = 256,
  parameter int unsigned AW          = 16,
  parameter bit          USE_FP_CONV = 1'b1,
  parameter string       INIT_FILE   = "",
  localparam int unsigned CAW        = $clog2(CODE_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            halted,
  output logic            running,
  // program loading
  input  logic            prog_we,
  input  logic [CAW-1:0]  prog_addr,
  input  logic [31:0]     prog_data,
  // data memory interface
  output logic            mem_req,
  output logic            mem_we,
  output logic [AW-1:0]   mem_addr,
  output logic [63:0]     mem_wdata,
  input  logic            mem_gnt,
  input  logic            mem_rvalid,
  input  logic [63:0]     mem_rdata
);
  localparam int unsigned VRW = $clog2(NVREG);
  localparam int unsigned SRW = $clog2(NSREG);
  localparam int unsigned IW  = $clog2(VLEN);
  localparam int unsigned LW  = $clog2(VLEN + 1);

  // code memory
  logic [CAW-1:0] imem_addr;
  logic [31:0]    imem_data;

  // register files
  logic [VRW-1:0]      vrf_ra, vrf_rb, vrf_wa;
  logic                vrf_we;
  logic signed [W-1:0] vrf_va [VLEN];
  logic signed [W-1:0] vrf_vb [VLEN];
  logic [SRW-1:0]      srf_ra, srf_rb, srf_wa, cu_srf_wa;
  logic signed [W-1:0] srf_da, srf_db, srf_wd, cu_srf_wd;
  logic                srf_we, cu_srf_we;

  // sequencer
  logic                seq_start, seq_busy, seq_done;
  alu_op_e             seq_op;
  seq_src_e            seq_src;
  logic [LW-1:0]       seq_len;
  logic signed [W-1:0] seq_va [VLEN];
  logic signed [W-1:0] seq_vb [VLEN];
  logic signed [W-1:0] seq_vy [VLEN];

  // load/store
  logic                ls_start, ls_busy, ls_done, ls_fconv;
  ls_kind_e            ls_kind;
  logic [AW-1:0]       ls_addr;
  logic [SRW-1:0]      ls_reg;
  logic                ls_vwe, ls_swe;
  logic [SRW-1:0]      ls_vreg, ls_swa;
  logic [IW-1:0]       ls_vidx;
  logic signed [W-1:0] ls_vwd, ls_vrd, ls_swd;

  code_memory #(.CODE_DEPTH(CODE_DEPTH), .INIT_FILE(INIT_FILE)) u_code (
    .clk, .raddr(imem_addr), .rdata(imem_data),
    .we(prog_we), .waddr(prog_addr), .wdata(prog_data)
  );

  control_unit #(
    .W(W), .FRAC(FRAC), .CODE_DEPTH(CODE_DEPTH), .NVREG(NVREG), .NSREG(NSREG), .AW(AW)
  ) u_ctrl (
    .clk, .rst_n, .start, .halted, .running,
    .imem_addr, .imem_data,
    .vrf_ra, .vrf_rb, .srf_ra, .srf_rb, .srf_da, .srf_db,
    .vrf_we, .vrf_wa, .srf_we(cu_srf_we), .srf_wa(cu_srf_wa), .srf_wd(cu_srf_wd),
    .seq_start, .seq_op, .seq_src, .seq_done, .seq_y0(seq_vy[0]),
    .ls_start, .ls_kind, .ls_fconv, .ls_addr, .ls_reg, .ls_done
  );

  vector_regfile #(.W(W), .VLEN(VLEN), .NVREG(NVREG)) u_vrf (
    .clk, .rst_n,
    .ra(vrf_ra), .rb(vrf_rb), .va(vrf_va), .vb(vrf_vb),
    .we(vrf_we), .wa(vrf_wa), .wd(seq_vy),
    .ewe(ls_vwe), .ereg(VRW'(ls_vreg)), .eidx(ls_vidx), .ewd(ls_vwd), .erd(ls_vrd)
  );

  // Scalar register write: the load/store unit (scalar loads) or the control
  // unit (immediates, scalar ALU results); never both in one cycle.
  always_comb begin
    srf_we = ls_swe || cu_srf_we;
    srf_wa = ls_swe ? ls_swa : cu_srf_wa;
    srf_wd = ls_swe ? ls_swd : cu_srf_wd;
  end

  scalar_regfile #(.W(W), .NSREG(NSREG)) u_srf (
    .clk, .rst_n, .ra(srf_ra), .rb(srf_rb), .da(srf_da), .db(srf_db),
    .we(srf_we), .wa(srf_wa), .wd(srf_wd)
  );

  // Sequencer operands: vector registers, a broadcast scalar, or scalars in
  // element 0 for scalar instructions.
  always_comb begin
    for (int e = 0; e < int'(VLEN); e++) begin
      unique case (seq_src)
        SRC_VV: begin
          seq_va[e] = vrf_va[e];
          seq_vb[e] = vrf_vb[e];
        end
        SRC_VS: begin
          seq_va[e] = vrf_va[e];
          seq_vb[e] = srf_db;
        end
        default: begin
          seq_va[e] = (e == 0) ? srf_da : '0;
          seq_vb[e] = (e == 0) ? srf_db : '0;
        end
      endcase
    end
    seq_len = (seq_src == SRC_SS) ? LW'(1) : LW'(VLEN);
  end

  alu_sequencer #(
    .W(W), .FRAC(FRAC), .VLEN(VLEN), .N_ADD(N_ADD), .N_MUL(N_MUL), .N_DIV(N_DIV)
  ) u_seq (
    .clk, .rst_n, .start(seq_start), .op(seq_op), .len(seq_len),
    .va(seq_va), .vb(seq_vb), .busy(seq_busy), .done(seq_done), .vy(seq_vy)
  );

  load_store_unit #(
    .W(W), .FRAC(FRAC), .VLEN(VLEN), .AW(AW), .RW(SRW), .USE_FP_CONV(USE_FP_CONV)
  ) u_lsu (
    .clk, .rst_n,
    .start(ls_start), .kind(ls_kind), .fconv(ls_fconv), .addr(ls_addr), .reg_idx(ls_reg),
    .sdata(srf_da), .busy(ls_busy), .done(ls_done),
    .vwe(ls_vwe), .vreg(ls_vreg), .vidx(ls_vidx), .vwd(ls_vwd), .vrd(ls_vrd),
    .swe(ls_swe), .swa(ls_swa), .swd(ls_swd),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata
  );

  // The two execution units are never busy at the same time.
  a_one_unit: assert property (@(posedge clk) disable iff (!rst_n) !(seq_busy && ls_busy));
endmodule
