// alu_sequencer: the wrapper that runs whole-array operations on a vector ALU
// with fewer (or as many) units than the vector has elements.
//
// The control unit issues one operation on up to VLEN elements; this block
// hides how many functional units of that kind exist. On start it copies both
// operand vectors into its input interface registers, then walks the elements
// in batches of as many elements as there are units of the required kind
// (adders for add/sub, multipliers for mul, dividers for div). Element e goes
// to lane e mod N in batch e / N. Results are gathered into the output
// interface registers vy, which stay valid until the next start.
//
// Timing (start in cycle 0, B = ceil(len / N) batches):
//   add, sub, mul: one batch per clock; done pulses in cycle B+1.
//   div:           each batch starts the dividers (1 clock) and waits for
//                  them (W+FRAC+1 clocks); done pulses in cycle 1+B*(W+FRAC+2).
// start is ignored while busy. len = 1 is used for scalar instructions.
//
// The architecture calls for such a sequencing wrapper with interface
// registers; the batch order and the timing above are this design's choice.
module alu_sequencer
  import vp_pkg::*;
#(
  parameter int unsigned W     = 64,
  parameter int unsigned FRAC  = 32,
  parameter int unsigned VLEN  = 24,
  parameter int unsigned N_ADD = 8,
  parameter int unsigned N_MUL = 8,
  parameter int unsigned N_DIV = 24,
  localparam int unsigned LW   = $clog2(VLEN + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  alu_op_e             op,
  input  logic [LW-1:0]       len,
  input  logic signed [W-1:0] va [VLEN],
  input  logic signed [W-1:0] vb [VLEN],
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] vy [VLEN]
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DSTART, S_DWAIT} state_e;

  state_e              state;
  alu_op_e             op_q;
  logic [LW-1:0]       len_q;
  logic [LW-1:0]       bat;      // current batch
  logic signed [W-1:0] opa [VLEN];
  logic signed [W-1:0] opb [VLEN];

  logic signed [W-1:0] add_a [N_ADD], add_b [N_ADD], add_y [N_ADD];
  logic signed [W-1:0] mul_a [N_MUL], mul_b [N_MUL], mul_y [N_MUL];
  logic signed [W-1:0] div_a [N_DIV], div_b [N_DIV], div_y [N_DIV];
  logic                div_start, div_busy, div_done;

  // Units of the kind the current operation uses, and whether the current
  // batch is the last one.
  int unsigned n_units;
  logic        last_bat;

  always_comb begin
    unique case (op_q)
      ALU_ADD, ALU_SUB: n_units = N_ADD;
      ALU_MUL:          n_units = N_MUL;
      default:          n_units = N_DIV;
    endcase
    last_bat = (32'(bat) + 1) * n_units >= 32'(len_q);
  end

  // Lane operand selection: lane j of batch bat takes element bat*N+j.
  always_comb begin
    for (int j = 0; j < int'(N_ADD); j++) begin
      int unsigned e;
      e = 32'(bat) * N_ADD + 32'(j);
      add_a[j] = (e < VLEN) ? opa[e] : '0;
      add_b[j] = (e < VLEN) ? opb[e] : '0;
    end
    for (int j = 0; j < int'(N_MUL); j++) begin
      int unsigned e;
      e = 32'(bat) * N_MUL + 32'(j);
      mul_a[j] = (e < VLEN) ? opa[e] : '0;
      mul_b[j] = (e < VLEN) ? opb[e] : '0;
    end
    for (int j = 0; j < int'(N_DIV); j++) begin
      int unsigned e;
      e = 32'(bat) * N_DIV + 32'(j);
      div_a[j] = (e < VLEN) ? opa[e] : '0;
      div_b[j] = (e < VLEN) ? opb[e] : '0;
    end
    div_start = (state == S_DSTART);
  end

  vector_alu #(.W(W), .FRAC(FRAC), .N_ADD(N_ADD), .N_MUL(N_MUL), .N_DIV(N_DIV)) u_valu (
    .clk, .rst_n,
    .add_a, .add_b, .add_sub(op_q == ALU_SUB), .add_y,
    .mul_a, .mul_b, .mul_y,
    .div_start, .div_a, .div_b, .div_y, .div_busy, .div_done
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      op_q  <= ALU_ADD;
      len_q <= '0;
      bat   <= '0;
      done  <= 1'b0;
      for (int e = 0; e < int'(VLEN); e++) begin
        opa[e] <= '0;
        opb[e] <= '0;
        vy[e]  <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          opa   <= va;
          opb   <= vb;
          op_q  <= op;
          len_q <= len;
          bat   <= '0;
          state <= (op == ALU_DIV) ? S_DSTART : S_RUN;
        end
        S_RUN: begin
          for (int e = 0; e < int'(VLEN); e++) begin
            if (op_q == ALU_MUL) begin
              if (e / N_MUL == int'(bat) && e < int'(len_q)) vy[e] <= mul_y[e % N_MUL];
            end else begin
              if (e / N_ADD == int'(bat) && e < int'(len_q)) vy[e] <= add_y[e % N_ADD];
            end
          end
          bat <= bat + 1'b1;
          if (last_bat) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_DSTART: state <= S_DWAIT;
        S_DWAIT: if (div_done) begin
          for (int e = 0; e < int'(VLEN); e++)
            if (e / N_DIV == int'(bat) && e < int'(len_q)) vy[e] <= div_y[e % N_DIV];
          bat <= bat + 1'b1;
          if (last_bat) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_DSTART;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // A batch of dividers is only started when all of them are idle.
  a_div_idle: assert property (@(posedge clk) disable iff (!rst_n) div_start |-> !div_busy);
endmodule
