// bender_pkg: types, field positions and constants shared by the DRAM Bender
// hardware (programmable core, periodic operation scheduler, DRAM interface
// adapter, frontend and readback FIFO).
//
// Instruction word (72 bits).  Two formats exist:
//
//   DRAM instruction: four 18-bit DRAM commands, slot k in bits
//   [18k+17:18k].  Slot 0 is issued first.  Inside one command:
//       [17:12] op code  ([17:16] reserved, kept 0; [15:12] command)
//       [11:8]  flags    ([8] increment register A, [9] increment register B,
//                         [10] auto-precharge (READ/WRITE) or all-banks (PRE),
//                         [11] burst chop (READ/WRITE))
//       [7:4]   address register ID B  (row for ACT, column for READ/WRITE)
//       [3:0]   address register ID A  (bank)
//
//   Regular (arithmetic / memory / control) instruction:
//       [71:64] must be 0  [63:59] op code  [58:57] unused  [56:48] function
//       [47:24] unused     [23:20] RD       [19:8]  imm[15:4]
//       [7:4]   RS2 or imm[3:0]             [3:0]   RS1
//
// The 18-bit command, the 72-bit word and the positions of the op code,
// flags and register-ID fields and of the regular-instruction fields follow
// the paper's encoding figure.  The numeric op codes, the flag bit meanings,
// and the rule that separates the two formats (a DRAM instruction has a
// non-zero op code in slot 3, a regular one has bits [71:64] zero) are this
// design's own choices.
//
// Register IDs: 0..12 are the 13 general-purpose registers, 13..15 the bank,
// row and column address stride registers.  The 512-bit wide-data register
// is separate and written only by LDWD.
package bender_pkg;

  // ------------------------------------------------------------------------
  // Sizes
  // ------------------------------------------------------------------------
  localparam int unsigned INSTR_W     = 72;   // instruction width (paper)
  localparam int unsigned CMD_W       = 18;   // DRAM command width (paper)
  localparam int unsigned NSLOT       = 4;    // DRAM commands per instruction (paper)
  localparam int unsigned XLEN        = 32;   // register and scratchpad word width
  localparam int unsigned NREG        = 16;   // 13 GPRs + 3 stride registers (paper)
  localparam int unsigned NGPR        = 13;
  localparam int unsigned WIDE_W      = 512;  // wide-data register / DRAM transfer (paper)
  localparam int unsigned WIDE_WORDS  = WIDE_W / XLEN;
  localparam int unsigned BANK_W      = 4;    // DDR4 bank group (2) + bank (2)
  localparam int unsigned ROW_W       = 17;   // DDR4 A16..A0
  localparam int unsigned COL_W       = 10;   // DDR4 column address
  localparam int unsigned DADDR_W     = 17;   // address bus carried per command

  // stride register IDs
  localparam logic [3:0] REG_BASR = 4'd13;    // bank address stride
  localparam logic [3:0] REG_RASR = 4'd14;    // row address stride
  localparam logic [3:0] REG_CASR = 4'd15;    // column address stride

  // ------------------------------------------------------------------------
  // DRAM command op codes (4-bit command field of a DRAM command slot)
  // ------------------------------------------------------------------------
  typedef enum logic [3:0] {
    DC_NONE  = 4'd0,   // marks a regular instruction when found in slot 3
    DC_NOP   = 4'd1,
    DC_ACT   = 4'd2,
    DC_PRE   = 4'd3,
    DC_READ  = 4'd4,
    DC_WRITE = 4'd5,
    DC_REF   = 4'd6,
    DC_ZQS   = 4'd7,
    DC_SRE   = 4'd8,   // issued by the SRE instruction, not encodable by users
    DC_SRX   = 4'd9    // issued by the SRX instruction, not encodable by users
  } dram_cmd_e;

  // flag bit positions inside the 4-bit flags field
  localparam int unsigned FL_INCA = 0;
  localparam int unsigned FL_INCB = 1;
  localparam int unsigned FL_AP   = 2;
  localparam int unsigned FL_BC   = 3;

  // ------------------------------------------------------------------------
  // Regular instruction op codes (5 bits) and ALU functions (9 bits)
  // ------------------------------------------------------------------------
  typedef enum logic [4:0] {
    OP_NOP    = 5'd0,
    OP_ARITH  = 5'd1,   // RD = RS1 <fn> RS2
    OP_ARITHI = 5'd2,   // RD = RS1 <fn> imm16
    OP_LI     = 5'd3,   // RD = imm16
    OP_LD     = 5'd4,   // RD = scratchpad[RS1]
    OP_ST     = 5'd5,   // scratchpad[RS1] = RS2
    OP_BL     = 5'd6,   // if RS1 <  RS2 (unsigned) PC = imm[15:4]
    OP_BEQ    = 5'd7,   // if RS1 == RS2            PC = imm[15:4]
    OP_JUMP   = 5'd8,   // PC = imm16
    OP_SLEEP  = 5'd9,   // stall imm16 cycles
    OP_LDWD   = 5'd10,  // wide_data[32*imm16 +: 32] = RS1
    OP_LDPC   = 5'd11,  // RD = performance counter imm16
    OP_SRE    = 5'd12,  // self-refresh entry
    OP_SRX    = 5'd13,  // self-refresh exit
    OP_END    = 5'd14,  // stop executing the program
    OP_RBHINT = 5'd15   // readback hint: wait for imm16 free FIFO entries
  } op_e;

  typedef enum logic [8:0] {
    FN_AND = 9'd1,
    FN_OR  = 9'd2,
    FN_XOR = 9'd3,
    FN_ADD = 9'd4,
    FN_SUB = 9'd5,
    FN_MV  = 9'd6,   // RD = RS1
    FN_SRC = 9'd7    // RD = RS1 rotated right by one bit
  } fn_e;

  // performance counters readable by LDPC
  localparam logic [15:0] PC_CYCLES   = 16'd0;  // cycles since program start
  localparam logic [15:0] PC_DRAMCMDS = 16'd1;  // non-NOP DRAM commands issued
  localparam logic [15:0] PC_READS    = 16'd2;  // READ commands issued

  // ------------------------------------------------------------------------
  // Field accessors
  // ------------------------------------------------------------------------
  function automatic logic is_dram_instr(input logic [INSTR_W-1:0] i);
    return i[71:66] != 6'd0;
  endfunction

  function automatic logic [CMD_W-1:0] slot_of(input logic [INSTR_W-1:0] i, input int unsigned k);
    return i[CMD_W*k +: CMD_W];
  endfunction

  function automatic logic [4:0]  f_op (input logic [INSTR_W-1:0] i); return i[63:59]; endfunction
  function automatic logic [8:0]  f_fn (input logic [INSTR_W-1:0] i); return i[56:48]; endfunction
  function automatic logic [3:0]  f_rd (input logic [INSTR_W-1:0] i); return i[23:20]; endfunction
  function automatic logic [3:0]  f_rs1(input logic [INSTR_W-1:0] i); return i[3:0];   endfunction
  function automatic logic [3:0]  f_rs2(input logic [INSTR_W-1:0] i); return i[7:4];   endfunction
  function automatic logic [15:0] f_imm16(input logic [INSTR_W-1:0] i); return i[19:4]; endfunction
  function automatic logic [11:0] f_imm12(input logic [INSTR_W-1:0] i); return i[19:8]; endfunction

  // ------------------------------------------------------------------------
  // Encoders (used by the POS program memory and by testbenches)
  // ------------------------------------------------------------------------
  function automatic logic [CMD_W-1:0] enc_cmd(input dram_cmd_e c, input logic [3:0] flags,
                                               input logic [3:0] ra, input logic [3:0] rb);
    return {2'b00, c, flags, rb, ra};
  endfunction

  function automatic logic [INSTR_W-1:0] enc_dram(input logic [CMD_W-1:0] c0, input logic [CMD_W-1:0] c1,
                                                  input logic [CMD_W-1:0] c2, input logic [CMD_W-1:0] c3);
    return {c3, c2, c1, c0};
  endfunction

  function automatic logic [CMD_W-1:0] cmd_nop();
    return enc_cmd(DC_NOP, 4'h0, 4'h0, 4'h0);
  endfunction

  function automatic logic [INSTR_W-1:0] enc_reg(input op_e op, input logic [8:0] fn, input logic [3:0] rd,
                                                 input logic [3:0] rs1, input logic [3:0] rs2,
                                                 input logic [11:0] imm12);
    logic [INSTR_W-1:0] i;
    i        = '0;
    i[63:59] = op;
    i[56:48] = fn;
    i[23:20] = rd;
    i[19:8]  = imm12;
    i[7:4]   = rs2;
    i[3:0]   = rs1;
    return i;
  endfunction

  function automatic logic [INSTR_W-1:0] enc_imm(input op_e op, input logic [8:0] fn, input logic [3:0] rd,
                                                 input logic [3:0] rs1, input logic [15:0] imm16);
    return enc_reg(op, fn, rd, rs1, imm16[3:0], imm16[15:4]);
  endfunction

  // ------------------------------------------------------------------------
  // Micro-operations
  // ------------------------------------------------------------------------
  typedef struct packed {
    logic        valid;
    op_e         op;
    logic [8:0]  fn;
    logic [3:0]  rd;
    logic [3:0]  rs1;
    logic [3:0]  rs2;
    logic [15:0] imm16;
    logic [11:0] imm12;
    logic [15:0] next_pc;   // PC of the following instruction (branch fall-through)
  } exec_uop_t;

  typedef struct packed {
    dram_cmd_e  cmd;
    logic [3:0] flags;
    logic [3:0] ra;
    logic [3:0] rb;
  } dram_slot_t;

  typedef struct packed {
    logic                   valid;
    dram_slot_t [NSLOT-1:0] slot;
  } dram_uop_t;

  // Output of the DRAM pipeline: one-hot command strobes (bit k = slot k)
  // plus the address of every slot.
  typedef struct packed {
    logic [NSLOT-1:0]                 act;
    logic [NSLOT-1:0]                 pre;
    logic [NSLOT-1:0]                 rd;
    logic [NSLOT-1:0]                 wr;
    logic [NSLOT-1:0]                 refr;
    logic [NSLOT-1:0]                 zqs;
    logic [NSLOT-1:0]                 sre;
    logic [NSLOT-1:0]                 srx;
    logic [NSLOT-1:0]                 ap;     // auto-precharge / precharge all
    logic [NSLOT-1:0]                 bc;     // burst chop
    logic [NSLOT-1:0][BANK_W-1:0]     bank;
    logic [NSLOT-1:0][DADDR_W-1:0]    addr;   // row for ACT, column for RD/WR
  } dram_cmds_t;

  // Configuration of the periodic operation scheduler
  typedef struct packed {
    logic        ref_en;
    logic        zq_en;
    logic        prd_en;
    logic [31:0] ref_period;   // fabric clock cycles between refreshes
  } pos_cfg_t;

endpackage
