// bender_prog: helpers for testbenches that assemble DRAM Bender programs.
// Each function returns one 72-bit instruction built with the field
// encoders of bender_pkg.
package bender_prog;
  import bender_pkg::*;

  function automatic logic [71:0] i_li(input logic [3:0] rd, input logic [15:0] imm);
    return enc_imm(OP_LI, 9'd0, rd, 4'd0, imm);
  endfunction
  function automatic logic [71:0] i_addi(input logic [3:0] rd, input logic [3:0] rs, input logic [15:0] imm);
    return enc_imm(OP_ARITHI, FN_ADD, rd, rs, imm);
  endfunction
  function automatic logic [71:0] i_alu(input fn_e fn, input logic [3:0] rd, input logic [3:0] rs1, input logic [3:0] rs2);
    return enc_reg(OP_ARITH, fn, rd, rs1, rs2, 12'd0);
  endfunction
  function automatic logic [71:0] i_ldwd(input logic [3:0] rs, input logic [15:0] idx);
    return enc_imm(OP_LDWD, 9'd0, 4'd0, rs, idx);
  endfunction
  function automatic logic [71:0] i_ldpc(input logic [3:0] rd, input logic [15:0] idx);
    return enc_imm(OP_LDPC, 9'd0, rd, 4'd0, idx);
  endfunction
  function automatic logic [71:0] i_st(input logic [3:0] ra, input logic [3:0] rv);
    return enc_reg(OP_ST, 9'd0, 4'd0, ra, rv, 12'd0);
  endfunction
  function automatic logic [71:0] i_ld(input logic [3:0] rd, input logic [3:0] ra);
    return enc_reg(OP_LD, 9'd0, rd, ra, 4'd0, 12'd0);
  endfunction
  function automatic logic [71:0] i_bl(input logic [3:0] rs1, input logic [3:0] rs2, input logic [11:0] tgt);
    return enc_reg(OP_BL, 9'd0, 4'd0, rs1, rs2, tgt);
  endfunction
  function automatic logic [71:0] i_beq(input logic [3:0] rs1, input logic [3:0] rs2, input logic [11:0] tgt);
    return enc_reg(OP_BEQ, 9'd0, 4'd0, rs1, rs2, tgt);
  endfunction
  function automatic logic [71:0] i_jump(input logic [15:0] tgt);
    return enc_imm(OP_JUMP, 9'd0, 4'd0, 4'd0, tgt);
  endfunction
  function automatic logic [71:0] i_sleep(input logic [15:0] n);
    return enc_imm(OP_SLEEP, 9'd0, 4'd0, 4'd0, n);
  endfunction
  function automatic logic [71:0] i_rbhint(input logic [15:0] n);
    return enc_imm(OP_RBHINT, 9'd0, 4'd0, 4'd0, n);
  endfunction
  function automatic logic [71:0] i_op(input op_e op);
    return enc_imm(op, 9'd0, 4'd0, 4'd0, 16'd0);
  endfunction
  // one DRAM command in slot 0, NOPs in the others
  function automatic logic [71:0] i_dram1(input dram_cmd_e c, input logic [3:0] flags,
                                          input logic [3:0] ra, input logic [3:0] rb);
    return enc_dram(enc_cmd(c, flags, ra, rb), cmd_nop(), cmd_nop(), cmd_nop());
  endfunction
endpackage
