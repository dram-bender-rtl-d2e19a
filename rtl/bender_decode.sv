// bender_decode: decode stage of the programmable core.
//
// Turns the instruction delivered by the fetch stage into either one
// execute micro-op (regular instruction) or one DRAM micro-op carrying four
// DRAM commands (DRAM instruction), and registers it into the first stage
// of the matching pipeline.  At most one micro-op leaves decode per cycle,
// so the two pipelines never hold micro-ops in the same stage at once.
//
// Decode also owns the three ways a program waits:
//   * SLEEP n     holds decode (and fetch) for n cycles: the next
//                 instruction reaches decode n+1 cycles after SLEEP did.
//   * RBHINT n    the readback hint placed before a DRAM command sequence
//                 that contains n READs: decode holds until the readback
//                 FIFO can take n more transfers (`rb_credit` = free FIFO
//                 entries minus READs issued whose data has not returned),
//                 so a stall happens here, between sequences, and never
//                 inside one.
//   * control flow (BL, BEQ, JUMP) and END: accepted at once, but fetch is
//                 told to squash the younger instructions and wait for the
//                 third execute stage (`hold`).
// SRE and SRX are regular instructions in the ISA but drive a DRAM command,
// so they leave decode as DRAM micro-ops with the command in slot 0.
// `n_reads` counts the READs of each accepted DRAM micro-op for the core's
// outstanding-read counter.
//
// The paper gives the decode split (one execute or four DRAM micro-ops), the
// SLEEP instruction, the readback hints and the branch stall; the hint being
// an instruction of its own (RBHINT), SLEEP counting fabric cycles from an
// immediate, and the exact cycle counts are this design's choices.
module bender_decode
  import bender_pkg::*;
#(
  parameter int unsigned AW = 11
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 valid,
  input  logic [INSTR_W-1:0]   instr,
  input  logic [AW-1:0]        pc,
  input  logic signed [15:0]   rb_credit,
  output logic                 stall,
  output logic                 hold,
  output exec_uop_t            ex_uop,     // registered: first execute stage
  output dram_uop_t            dr_uop,     // registered: first DRAM stage
  output logic [2:0]           n_reads     // READs accepted this cycle
);
  logic        sleeping;
  logic [15:0] sleep_cnt;

  logic        is_dram;
  op_e         op;
  logic        accept;
  exec_uop_t   ex_d;
  dram_uop_t   dr_d;

  assign is_dram = is_dram_instr(instr);
  assign op      = op_e'(f_op(instr));

  always_comb begin
    stall = 1'b0;
    hold  = 1'b0;
    if (valid && !is_dram) begin
      unique case (op)
        OP_SLEEP:  stall = sleeping ? (sleep_cnt != 16'd0) : (f_imm16(instr) != 16'd0);
        OP_RBHINT: stall = $signed({rb_credit[15], rb_credit}) < $signed({1'b0, f_imm16(instr)});
        OP_BL, OP_BEQ, OP_JUMP, OP_END: hold = 1'b1;
        default: ;
      endcase
    end
  end

  assign accept = valid && !stall;

  always_comb begin
    ex_d         = '0;
    ex_d.op      = op;
    ex_d.fn      = f_fn(instr);
    ex_d.rd      = f_rd(instr);
    ex_d.rs1     = f_rs1(instr);
    ex_d.rs2     = f_rs2(instr);
    ex_d.imm16   = f_imm16(instr);
    ex_d.imm12   = f_imm12(instr);
    ex_d.next_pc = 16'(pc) + 16'd1;
    dr_d         = '0;
    n_reads      = '0;
    if (accept) begin
      if (is_dram) begin
        dr_d.valid = 1'b1;
        for (int k = 0; k < NSLOT; k++) begin
          dr_d.slot[k].cmd   = dram_cmd_e'(instr[CMD_W*k+12 +: 4]);
          dr_d.slot[k].flags = instr[CMD_W*k+8 +: 4];
          dr_d.slot[k].rb    = instr[CMD_W*k+4 +: 4];
          dr_d.slot[k].ra    = instr[CMD_W*k +: 4];
          if (dr_d.slot[k].cmd == DC_READ) n_reads = n_reads + 3'd1;
        end
      end else if (op == OP_SRE || op == OP_SRX) begin
        dr_d.valid = 1'b1;
        dr_d.slot[0].cmd = (op == OP_SRE) ? DC_SRE : DC_SRX;
        for (int k = 1; k < NSLOT; k++) dr_d.slot[k].cmd = DC_NOP;
      end else if (op != OP_SLEEP && op != OP_RBHINT && op != OP_NOP) begin
        ex_d.valid = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sleeping  <= 1'b0;
      sleep_cnt <= '0;
      ex_uop    <= '0;
      dr_uop    <= '0;
    end else begin
      ex_uop <= ex_d;
      dr_uop <= dr_d;
      if (valid && !is_dram && op == OP_SLEEP) begin
        if (!sleeping) begin
          if (f_imm16(instr) != 16'd0) begin
            sleeping  <= 1'b1;
            sleep_cnt <= f_imm16(instr) - 16'd1;
          end
        end else if (sleep_cnt != 16'd0) begin
          sleep_cnt <= sleep_cnt - 16'd1;
        end else begin
          sleeping <= 1'b0;
        end
      end
    end
  end
endmodule
