// bender_exec_pipe: the three execute stages (EXE1..EXE3) for regular
// micro-ops.
//
//   EXE1  holds the micro-op coming from decode (`uop_in` is already the
//         decode stage's output register).
//   EXE2  reads the register file, computes ALU results (AND, OR, XOR, ADD,
//         SUB, MV, SRC and their immediate forms, LI), reads performance
//         counters (LDPC), writes one register, writes a word of the
//         wide-data register (LDWD), stores to the scratchpad (ST), presents
//         a load address (LD) and evaluates branch conditions.
//   EXE3  writes load data to the register file and resolves control flow:
//         `redirect` with the target (taken) or the next PC (not taken, so
//         the penalty is the same either way).  END raises `end_retire`.
//
// Branch conditions compare unsigned 32-bit values; BL/BEQ targets are the
// 12-bit immediate, JUMP the 16-bit immediate, both absolute.  ST and LD
// address the scratchpad with RS1 alone.  The stage in which registers are
// read and written, and loads writing one stage later, follow the paper;
// operand conventions and the unsigned compare are this design's choices.
module bender_exec_pipe
  import bender_pkg::*;
#(
  parameter int unsigned AW    = 11,  // instruction address width
  parameter int unsigned SP_AW = 10   // scratchpad address width
) (
  input  logic                       clk,
  input  logic                       rst,
  input  exec_uop_t                  uop_in,
  input  logic [NREG-1:0][XLEN-1:0]  rf,
  input  logic [2:0][XLEN-1:0]       perf,
  // register file port A
  output logic                       wa_en,
  output logic [3:0]                 wa_addr,
  output logic [XLEN-1:0]            wa_data,
  // register file load port
  output logic                       wl_en,
  output logic [3:0]                 wl_addr,
  output logic [XLEN-1:0]            wl_data,
  // wide-data register
  output logic                       ww_en,
  output logic [$clog2(WIDE_WORDS)-1:0] ww_idx,
  output logic [XLEN-1:0]            ww_data,
  // scratchpad
  output logic                       sp_we,
  output logic [SP_AW-1:0]           sp_waddr,
  output logic [XLEN-1:0]            sp_wdata,
  output logic                       sp_re,
  output logic [SP_AW-1:0]           sp_raddr,
  input  logic [XLEN-1:0]            sp_rdata,
  // control flow
  output logic                       redirect,
  output logic [AW-1:0]              redirect_pc,
  output logic                       end_retire,
  // any micro-op in EXE1..EXE3
  output logic                       busy
);
  exec_uop_t ex2, ex3;
  logic      taken3;

  logic [XLEN-1:0] a, b, opb, res;
  logic            taken2;

  assign a   = rf[ex2.rs1];
  assign b   = rf[ex2.rs2];
  assign opb = (ex2.op == OP_ARITHI) ? XLEN'(ex2.imm16) : b;

  always_comb begin
    unique case (fn_e'(ex2.fn))
      FN_AND:  res = a & opb;
      FN_OR:   res = a | opb;
      FN_XOR:  res = a ^ opb;
      FN_ADD:  res = a + opb;
      FN_SUB:  res = a - opb;
      FN_MV:   res = a;
      FN_SRC:  res = {a[0], a[XLEN-1:1]};
      default: res = '0;
    endcase
  end

  always_comb begin
    wa_en   = 1'b0;
    wa_addr = ex2.rd;
    wa_data = res;
    ww_en   = 1'b0;
    ww_idx  = ex2.imm16[$clog2(WIDE_WORDS)-1:0];
    ww_data = a;
    sp_we   = 1'b0;
    sp_waddr = a[SP_AW-1:0];
    sp_wdata = b;
    sp_re    = 1'b0;
    sp_raddr = a[SP_AW-1:0];
    taken2   = 1'b0;
    if (ex2.valid) begin
      unique case (ex2.op)
        OP_ARITH, OP_ARITHI: wa_en = 1'b1;
        OP_LI:   begin wa_en = 1'b1; wa_data = XLEN'(ex2.imm16); end
        OP_LDPC: begin
          wa_en   = 1'b1;
          wa_data = (ex2.imm16 < 16'd3) ? perf[ex2.imm16[1:0]] : '0;
        end
        OP_LDWD: ww_en = 1'b1;
        OP_ST:   sp_we = 1'b1;
        OP_LD:   sp_re = 1'b1;
        OP_BL:   taken2 = a < b;
        OP_BEQ:  taken2 = a == b;
        OP_JUMP: taken2 = 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ex2    <= '0;
      ex3    <= '0;
      taken3 <= 1'b0;
    end else begin
      ex2    <= uop_in;
      ex3    <= ex2;
      taken3 <= taken2;
    end
  end

  always_comb begin
    wl_en      = ex3.valid && ex3.op == OP_LD;
    wl_addr    = ex3.rd;
    wl_data    = sp_rdata;
    redirect   = ex3.valid && (ex3.op == OP_BL || ex3.op == OP_BEQ || ex3.op == OP_JUMP);
    end_retire = ex3.valid && ex3.op == OP_END;
    unique case (ex3.op)
      OP_JUMP:        redirect_pc = AW'(ex3.imm16);
      OP_BL, OP_BEQ:  redirect_pc = taken3 ? AW'(ex3.imm12) : AW'(ex3.next_pc);
      default:        redirect_pc = AW'(ex3.next_pc);
    endcase
  end

  assign busy = uop_in.valid || ex2.valid || ex3.valid;
endmodule
