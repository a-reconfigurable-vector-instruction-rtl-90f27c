// control_unit: instruction fetch, decode and sequencing for one core.
//
// The control unit works at the level of whole-array instructions: a vector
// add is one instruction, and the unit simply hands it to the ALU sequencer
// and waits for its done, the way a load or store is handed to the load/store
// unit. That keeps the controller a small state machine:
//
//   IDLE  --start-->  FETCH (code address = pc)
//   FETCH  -> DECODE  (the synchronous code memory returns the word)
//   DECODE -> EXEC    (decode the word straight from memory and latch it;
//                      issue a start pulse to the sequencer or load/store
//                      unit, or finish NOP/SLI/JMP/BNZ/HALT -> FETCH)
//   EXEC   -> FETCH   (when the issued unit reports done; write back)
//   HALT: halted stays high until the next start, which runs from pc = 0.
//
// One instruction is in flight at a time; an instruction that needs no unit
// takes 2 clocks, one that uses the sequencer or the load/store unit takes
// 2 clocks plus that unit's start-to-done latency. Memory instructions
// address word imm + integer part of scalar register ra. Register-file read addresses are driven from the decoded
// instruction, so operands are stable in the issue cycle when the sequencer
// and load/store unit sample them. Results of ALU instructions are written
// back in the cycle the sequencer's done arrives. The instruction set and
// encoding are those of vp_pkg and are this design's own.
module control_unit
  import vp_pkg::*;
#(
  parameter int unsigned W          = 64,
  parameter int unsigned FRAC       = 32,
  parameter int unsigned CODE_DEPTH = 256,
  parameter int unsigned NVREG      = 8,
  parameter int unsigned NSREG      = 16,
  parameter int unsigned AW         = 16,
  localparam int unsigned CAW       = $clog2(CODE_DEPTH),
  localparam int unsigned VRW       = $clog2(NVREG),
  localparam int unsigned SRW       = $clog2(NSREG)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                halted,
  output logic                running,
  // code memory
  output logic [CAW-1:0]      imem_addr,
  input  logic [31:0]         imem_data,
  // register file reads
  output logic [VRW-1:0]      vrf_ra,
  output logic [VRW-1:0]      vrf_rb,
  output logic [SRW-1:0]      srf_ra,
  output logic [SRW-1:0]      srf_rb,
  input  logic signed [W-1:0] srf_da,
  input  logic signed [W-1:0] srf_db,
  // register file writes
  output logic                vrf_we,
  output logic [VRW-1:0]      vrf_wa,
  output logic                srf_we,
  output logic [SRW-1:0]      srf_wa,
  output logic signed [W-1:0] srf_wd,
  // ALU sequencer
  output logic                seq_start,
  output alu_op_e             seq_op,
  output seq_src_e            seq_src,
  input  logic                seq_done,
  input  logic signed [W-1:0] seq_y0,
  // load/store unit
  output logic                ls_start,
  output ls_kind_e            ls_kind,
  output logic                ls_fconv,
  output logic [AW-1:0]       ls_addr,
  output logic [SRW-1:0]      ls_reg,
  input  logic                ls_done
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_DECODE, S_EXEC, S_HALT} state_e;

  state_e         state;
  logic [CAW-1:0] pc;
  instr_t         ir_q;   // instruction being executed
  instr_t         ir;     // decoded word: straight from memory while decoding
  opcode_e        opc;
  logic [4:0]     rd, ra, rb;
  logic [15:0]    imm;

  // instruction classes
  logic is_vv, is_vs, is_ss, is_alu, is_ls;

  always_comb begin
    ir  = (state == S_DECODE) ? instr_t'(imem_data) : ir_q;
    opc = opcode_e'(ir[31:26]);
    rd  = ir[25:21];
    ra  = ir[20:16];
    rb  = ir[15:11];
    imm = ir[15:0];
    is_vv  = opc inside {OP_VADD, OP_VSUB, OP_VMUL, OP_VDIV};
    is_vs  = opc inside {OP_VADDS, OP_VSUBS, OP_VMULS, OP_VDIVS};
    is_ss  = opc inside {OP_SADD, OP_SSUB, OP_SMUL, OP_SDIV};
    is_alu = is_vv || is_vs || is_ss;
    is_ls  = opc inside {OP_VLD, OP_VST, OP_VLDF, OP_VSTF, OP_SLD, OP_SST, OP_SLDF, OP_SSTF};
  end

  always_comb begin
    imem_addr = pc;
    vrf_ra    = VRW'(ra);
    vrf_rb    = VRW'(rb);
    // stores and BNZ read the register named by rd
    srf_ra    = (opc inside {OP_SST, OP_SSTF, OP_BNZ}) ? SRW'(rd) : SRW'(ra);
    // memory instructions take their base address from register ra
    srf_rb    = is_ls ? SRW'(ra) : SRW'(rb);
    seq_op    = alu_op_e'(ir[27:26]);  // add, sub, mul, div in opcode order
    seq_src   = is_vv ? SRC_VV : (is_vs ? SRC_VS : SRC_SS);
    seq_start = (state == S_DECODE) && is_alu;
    ls_start  = (state == S_DECODE) && is_ls;
    unique case (opc)
      OP_VLD, OP_VLDF: ls_kind = LS_VLOAD;
      OP_VST, OP_VSTF: ls_kind = LS_VSTORE;
      OP_SLD, OP_SLDF: ls_kind = LS_SLOAD;
      default:         ls_kind = LS_SSTORE;
    endcase
    ls_fconv  = opc inside {OP_VLDF, OP_VSTF, OP_SLDF, OP_SSTF};
    ls_addr   = AW'(imm) + srf_db[FRAC +: AW];
    ls_reg    = SRW'(rd);
    // write back
    vrf_we    = (state == S_EXEC) && seq_done && !is_ss;
    vrf_wa    = VRW'(rd);
    srf_wa    = SRW'(rd);
    if (state == S_DECODE && opc == OP_SLI) begin
      srf_we = 1'b1;
      srf_wd = W'($signed(imm)) <<< FRAC;
    end else begin
      srf_we = (state == S_EXEC) && seq_done && is_ss;
      srf_wd = seq_y0;
    end
    halted  = (state == S_HALT);
    running = (state != S_IDLE) && (state != S_HALT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pc    <= '0;
      ir_q  <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_HALT: if (start) begin
          pc    <= '0;
          state <= S_FETCH;
        end
        S_FETCH: state <= S_DECODE;
        S_DECODE: begin
          ir_q <= imem_data;
          if (is_alu || is_ls) state <= S_EXEC;
          else begin
            unique case (opc)
              OP_HALT: state <= S_HALT;
              OP_JMP: begin
                pc    <= CAW'(imm);
                state <= S_FETCH;
              end
              OP_BNZ: begin
                pc    <= (srf_da != '0) ? CAW'(imm) : pc + 1'b1;
                state <= S_FETCH;
              end
              default: begin  // NOP, SLI and unknown opcodes
                pc    <= pc + 1'b1;
                state <= S_FETCH;
              end
            endcase
          end
        end
        S_EXEC: if ((is_alu && seq_done) || (is_ls && ls_done)) begin
          pc    <= pc + 1'b1;
          state <= S_FETCH;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
