// tb_bender_decode: drives instructions into the decode stage and checks
// the micro-operations, stalls and holds it produces:
//   - a DRAM instruction becomes one DRAM micro-op with its four slots in
//     order, and n_reads counts its READ commands;
//   - LI / ARITH fields reach the execute micro-op one edge later;
//   - SLEEP n stalls decode for exactly n cycles (SLEEP 0 for none);
//   - RBHINT n stalls until the readback credit reaches n;
//   - BL / BEQ / JUMP / END raise hold; SRE / SRX become DRAM micro-ops;
//   - NOP, SLEEP and RBHINT send nothing down either pipeline.
module tb_bender_decode;
  import bender_pkg::*;
  import bender_prog::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic valid, stall, hold;
  logic [INSTR_W-1:0] instr;
  logic [10:0] pc;
  logic signed [15:0] rb_credit;
  exec_uop_t ex_uop;
  dram_uop_t dr_uop;
  logic [2:0] n_reads;

  bender_decode dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask

  // present an instruction and count the cycles decode stalls on it
  task automatic run_stall(input logic [INSTR_W-1:0] i, output int n);
    n = 0;
    valid = 1; instr = i; #1;
    while (stall && n < 200) begin tick(); n++; end
    tick(); valid = 0; instr = '0;
  endtask

  localparam int sleeps [4] = '{0, 1, 3, 17};
  localparam op_e ctl_ops [4] = '{OP_BL, OP_BEQ, OP_JUMP, OP_END};

  initial begin
    int n;
    valid = 0; instr = '0; pc = 11'd5; rb_credit = 16'sd100;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // DRAM instruction: ACT, READ, READ, PRE
    valid = 1;
    instr = enc_dram(enc_cmd(DC_ACT, 4'b0001, 4'd1, 4'd2), enc_cmd(DC_READ, 4'b0010, 4'd3, 4'd4),
                     enc_cmd(DC_READ, 4'b1100, 4'd5, 4'd6), enc_cmd(DC_PRE, 4'b0100, 4'd7, 4'd8));
    #1 check(n_reads == 3'd2 && !stall && !hold, "two READs counted");
    tick(); valid = 0;
    check(dr_uop.valid && !ex_uop.valid, "DRAM micro-op only");
    check(dr_uop.slot[0].cmd == DC_ACT && dr_uop.slot[0].flags == 4'b0001 && dr_uop.slot[0].ra == 1 && dr_uop.slot[0].rb == 2, "slot 0");
    check(dr_uop.slot[1].cmd == DC_READ && dr_uop.slot[1].ra == 3 && dr_uop.slot[1].rb == 4, "slot 1");
    check(dr_uop.slot[2].cmd == DC_READ && dr_uop.slot[2].flags == 4'b1100, "slot 2");
    check(dr_uop.slot[3].cmd == DC_PRE && dr_uop.slot[3].ra == 7 && dr_uop.slot[3].rb == 8, "slot 3");
    tick(); check(!dr_uop.valid, "one micro-op per instruction");
    // ARITH ADD R3 = R1 + R2
    valid = 1; instr = i_alu(FN_ADD, 4'd3, 4'd1, 4'd2); tick(); valid = 0;
    check(ex_uop.valid && ex_uop.op == OP_ARITH && ex_uop.fn == FN_ADD && ex_uop.rd == 3 &&
          ex_uop.rs1 == 1 && ex_uop.rs2 == 2 && ex_uop.next_pc == 16'd6 && !dr_uop.valid, "ARITH micro-op");
    valid = 1; instr = i_li(4'd9, 16'hBEEF); tick(); valid = 0;
    check(ex_uop.valid && ex_uop.op == OP_LI && ex_uop.rd == 9 && ex_uop.imm16 == 16'hBEEF, "LI micro-op");
    // SLEEP
    for (int j = 0; j < 4; j++) begin
      automatic int s = sleeps[j];
      run_stall(i_sleep(16'(s)), n);
      check(n == s, $sformatf("SLEEP %0d stalled %0d cycles", s, n));
      check(!ex_uop.valid && !dr_uop.valid, "SLEEP sends no micro-op");
    end
    // RBHINT: credit rises by one every cycle from 0
    rb_credit = 0;
    fork
      begin repeat (7) begin @(posedge clk); rb_credit <= rb_credit + 16'sd1; end end
      run_stall(i_rbhint(16'd4), n);
    join
    check(n == 4, $sformatf("RBHINT 4 waited %0d cycles", n));
    tick(); rb_credit = -16'sd2;
    valid = 1; instr = i_rbhint(16'd0); #1 check(stall, "negative credit stalls even RBHINT 0");
    rb_credit = 16'sd0; #1 check(!stall, "RBHINT 0 passes at zero credit");
    valid = 0;
    // control flow holds
    for (int j = 0; j < 4; j++) begin
      valid = 1; instr = i_op(ctl_ops[j]); #1;
      check(hold && !stall, "branch / END holds fetch");
      tick(); valid = 0;
      check(ex_uop.valid, "branch goes to execute");
    end
    valid = 1; instr = i_op(OP_SRE); tick(); valid = 0;
    check(dr_uop.valid && dr_uop.slot[0].cmd == DC_SRE && dr_uop.slot[1].cmd == DC_NOP && !ex_uop.valid, "SRE micro-op");
    valid = 1; instr = i_op(OP_SRX); tick(); valid = 0;
    check(dr_uop.valid && dr_uop.slot[0].cmd == DC_SRX && !ex_uop.valid, "SRX micro-op");
    valid = 1; instr = i_op(OP_NOP); tick(); valid = 0;
    check(!dr_uop.valid && !ex_uop.valid, "NOP sends nothing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
