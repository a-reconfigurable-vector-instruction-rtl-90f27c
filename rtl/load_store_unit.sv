// load_store_unit: moves vectors and scalars between the external data
// memory and the register files, converting number formats on the way.
//
// A command (start with kind, fconv, addr, reg_idx) moves VLEN consecutive
// memory words to or from vector register reg_idx, or one word to or from
// scalar register reg_idx. With fconv set, loaded words are IEEE-754 binary64
// and are converted to fixed point, and stored words are converted back; the
// converters exist only when USE_FP_CONV is 1, otherwise fconv is ignored.
// Scalar store data are taken from sdata in the start cycle.
//
// Memory port: a request (mem_req with mem_we, mem_addr, mem_wdata) is held
// until mem_gnt is high in the same cycle. Read data return on a later cycle
// with mem_rvalid; the unit keeps at most one read outstanding. Word
// addresses, 64-bit words.
//
// Timing: done pulses one clock after the last word is granted (stores) or
// returned (loads). With a memory that grants at once and returns read data
// one clock later, a vector load takes 2*VLEN+1 clocks and a store VLEN+1.
//
// The architecture places the converter inside this unit and connects the
// unit to the memory interface and both register files; the memory protocol
// and the element-serial transfer are this design's choices.
module load_store_unit
  import vp_pkg::*;
#(
  parameter int unsigned W           = 64,
  parameter int unsigned FRAC        = 32,
  parameter int unsigned VLEN        = 24,
  parameter int unsigned AW          = 16,
  parameter int unsigned RW          = 4,
  parameter bit          USE_FP_CONV = 1'b1,
  localparam int unsigned IW         = $clog2(VLEN)
) (
  input  logic                clk,
  input  logic                rst_n,
  // command
  input  logic                start,
  input  ls_kind_e            kind,
  input  logic                fconv,
  input  logic [AW-1:0]       addr,
  input  logic [RW-1:0]       reg_idx,
  input  logic signed [W-1:0] sdata,
  output logic                busy,
  output logic                done,
  // vector register element port
  output logic                vwe,
  output logic [RW-1:0]       vreg,
  output logic [IW-1:0]       vidx,
  output logic signed [W-1:0] vwd,
  input  logic signed [W-1:0] vrd,
  // scalar register write
  output logic                swe,
  output logic [RW-1:0]       swa,
  output logic signed [W-1:0] swd,
  // memory interface
  output logic                mem_req,
  output logic                mem_we,
  output logic [AW-1:0]       mem_addr,
  output logic [63:0]         mem_wdata,
  input  logic                mem_gnt,
  input  logic                mem_rvalid,
  input  logic [63:0]         mem_rdata
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT} state_e;

  state_e              state;
  ls_kind_e            kind_q;
  logic                fconv_q;
  logic [AW-1:0]       base_q;
  logic [RW-1:0]       reg_q;
  logic signed [W-1:0] sdata_q;
  logic [IW:0]         cnt;      // element being transferred

  logic                is_vec, is_store, last;
  logic signed [W-1:0] st_fixed;   // fixed-point word to store
  logic [63:0]         st_float;
  logic signed [W-1:0] ld_fixed;   // loaded word after conversion
  logic signed [W-1:0] ld_conv;

  always_comb begin
    is_vec   = (kind_q == LS_VLOAD) || (kind_q == LS_VSTORE);
    is_store = (kind_q == LS_VSTORE) || (kind_q == LS_SSTORE);
    last     = is_vec ? (cnt == (IW+1)'(VLEN - 1)) : 1'b1;
    st_fixed = is_vec ? vrd : sdata_q;
  end

  if (USE_FP_CONV) begin : g_conv
    float_to_fixed #(.W(W), .FRAC(FRAC)) u_f2x (.f(mem_rdata), .x(ld_conv));
    fixed_to_float #(.W(W), .FRAC(FRAC)) u_x2f (.x(st_fixed), .f(st_float));
  end else begin : g_noconv
    assign ld_conv  = W'(mem_rdata);
    assign st_float = 64'(st_fixed);
  end

  always_comb begin
    ld_fixed  = (fconv_q && USE_FP_CONV) ? ld_conv : W'(mem_rdata);
    mem_req   = (state == S_REQ);
    mem_we    = is_store;
    mem_addr  = base_q + AW'(cnt);
    mem_wdata = (fconv_q && USE_FP_CONV) ? st_float : 64'(st_fixed);
    vreg      = reg_q;
    vidx      = IW'(cnt);
    vwd       = ld_fixed;
    vwe       = (state == S_WAIT) && mem_rvalid && is_vec;
    swa       = reg_q;
    swd       = ld_fixed;
    swe       = (state == S_WAIT) && mem_rvalid && !is_vec;
    busy      = (state != S_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      kind_q  <= LS_VLOAD;
      fconv_q <= 1'b0;
      base_q  <= '0;
      reg_q   <= '0;
      sdata_q <= '0;
      cnt     <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          kind_q  <= kind;
          fconv_q <= fconv;
          base_q  <= addr;
          reg_q   <= reg_idx;
          sdata_q <= sdata;
          cnt     <= '0;
          state   <= S_REQ;
        end
        S_REQ: if (mem_gnt) begin
          if (!is_store) state <= S_WAIT;
          else if (last) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        S_WAIT: if (mem_rvalid) begin
          if (last) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            cnt   <= cnt + 1'b1;
            state <= S_REQ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A request, once raised, keeps its address and data until it is granted.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req && !mem_gnt |=> mem_req && $stable(mem_addr) && $stable(mem_we) && $stable(mem_wdata));
endmodule
