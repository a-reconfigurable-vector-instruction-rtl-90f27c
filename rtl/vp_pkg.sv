// vp_pkg: types and constants shared by the vector processing core.
//
// Numbers are signed fixed point, 64 bits wide with 32 fractional bits
// (Q32.32), the format the core uses throughout. The instruction set and its
// 32-bit encoding below are this design's own; the architecture only calls for
// vector instructions that work on whole arrays, scalar instructions for the
// non-vector parts, loads and stores through a converting load/store unit, and
// a Harvard code memory.
//
// Instruction word:  op[31:26] rd[25:21] ra[20:16] rb[15:11]; imm[15:0]
// overlaps rb for the forms that carry an immediate.
package vp_pkg;

  localparam int unsigned WORD_W = 64;  // fixed-point word width
  localparam int unsigned FRAC_W = 32;  // fractional bits
  localparam int unsigned INSTR_W = 32;

  typedef logic signed [WORD_W-1:0] word_t;
  typedef logic [INSTR_W-1:0] instr_t;

  // Operation performed by one functional-unit class of the vector ALU.
  typedef enum logic [1:0] {
    ALU_ADD = 2'd0,
    ALU_SUB = 2'd1,
    ALU_MUL = 2'd2,
    ALU_DIV = 2'd3
  } alu_op_e;

  typedef enum logic [5:0] {
    OP_NOP   = 6'h00,
    OP_HALT  = 6'h01,
    // vector-vector: vd = va (op) vb
    OP_VADD  = 6'h04,
    OP_VSUB  = 6'h05,
    OP_VMUL  = 6'h06,
    OP_VDIV  = 6'h07,
    // vector-scalar: vd = va (op) s[rb], scalar broadcast to every element
    OP_VADDS = 6'h08,
    OP_VSUBS = 6'h09,
    OP_VMULS = 6'h0A,
    OP_VDIVS = 6'h0B,
    // scalar: sd = sa (op) sb
    OP_SADD  = 6'h0C,
    OP_SSUB  = 6'h0D,
    OP_SMUL  = 6'h0E,
    OP_SDIV  = 6'h0F,
    // memory: word address = imm + integer part of s[ra]
    OP_VLD   = 6'h10,  // vd <- mem[addr .. addr+VLEN-1], fixed point
    OP_VST   = 6'h11,
    OP_VLDF  = 6'h12,  // same with floating-point to fixed-point conversion
    OP_VSTF  = 6'h13,
    OP_SLD   = 6'h14,
    OP_SST   = 6'h15,
    OP_SLDF  = 6'h16,
    OP_SSTF  = 6'h17,
    // scalar immediate: sd = sign_extend(imm) as an integer in Q32.32
    OP_SLI   = 6'h18,
    // control flow
    OP_JMP   = 6'h1C,  // pc = imm
    OP_BNZ   = 6'h1D   // if s[rd] != 0 then pc = imm
  } opcode_e;

  // Load/store unit command.
  typedef enum logic [1:0] {
    LS_VLOAD  = 2'd0,
    LS_VSTORE = 2'd1,
    LS_SLOAD  = 2'd2,
    LS_SSTORE = 2'd3
  } ls_kind_e;

  // Where the ALU sequencer's operands come from.
  typedef enum logic [1:0] {
    SRC_VV = 2'd0,  // two vector registers
    SRC_VS = 2'd1,  // vector register and a scalar broadcast to all elements
    SRC_SS = 2'd2   // two scalar registers, element 0 only
  } seq_src_e;

  function automatic instr_t mk_r(opcode_e op, logic [4:0] rd, logic [4:0] ra, logic [4:0] rb);
    return {op, rd, ra, rb, 11'd0};
  endfunction

  function automatic instr_t mk_i(opcode_e op, logic [4:0] rd, logic [4:0] ra, logic [15:0] imm);
    return {op, rd, ra, imm};
  endfunction

  // Integer to Q32.32.
  function automatic word_t int2fx(int i);
    return word_t'({{(WORD_W-32){i[31]}}, i}) <<< FRAC_W;
  endfunction

endpackage
