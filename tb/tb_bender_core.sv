// tb_bender_core: the programmable core with a two-cycle instruction
// memory, a DRAM model that returns every READ a fixed 5 cycles later
// (unless the testbench holds returns back) and a settable number of free
// readback FIFO entries.  Each program is loaded, started, and checked
// against values worked out by hand:
//   A  loop {ACT incB, ADDI, BL} five times: ACTs to rows 0..4, eight
//      cycles apart (two one-cycle instructions plus the six-cycle branch);
//      final registers and LDPC counter values.
//   B  ACT; SLEEP 10; ACT: twelve cycles apart (the SLEEP's own decode
//      cycle plus ten stall cycles, then the next instruction).  A four-command instruction
//      leaves in one cycle with the four strobes in slot order.
//   C  ST / LD / ADD on the loaded value (load bypass), SRC, SUB, BEQ
//      taken and not taken, JUMP.
//   D  RBHINT with two free entries: never more READs in flight than the
//      credit allows, and the program waits for returns.
// done pulses once per program and idle returns only after all READ data
// came back.
module tb_bender_core;
  import bender_pkg::*;
  import bender_prog::*;
  localparam int unsigned IMEM_DEPTH = 256, AW = 8, RB_DEPTH = 16;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic start, start_src, running, idle, done, cur_src, if_ren, if_src, dram_valid, rd_return;
  logic [AW-1:0] start_pc, if_addr;
  logic [INSTR_W-1:0] if_rdata;
  dram_cmds_t dram_cmds;
  logic [WIDE_W-1:0] dram_wdata;
  logic [4:0] rb_free;
  logic [15:0] pending_reads;

  bender_core #(.IMEM_DEPTH(IMEM_DEPTH), .SP_DEPTH(64), .RB_DEPTH(RB_DEPTH)) dut (.*);

  logic [INSTR_W-1:0] imem [IMEM_DEPTH];
  logic [INSTR_W-1:0] q1;
  always_ff @(posedge clk) if (if_ren) begin q1 <= imem[if_addr]; if_rdata <= q1; end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DRAM side: command log and read returns
  int cyc = 0;
  int act_t [$], act_row [$], rd_t [$];
  int due [$];
  bit hold_returns = 0;
  int max_inflight = 0, n_done = 0, n_four = 0, t_release = 0;
  always @(posedge clk) begin
    cyc++;
    rd_return <= 1'b0;
    if (!rst) begin
      if (dram_valid) begin
        for (int k = 0; k < NSLOT; k++) begin
          if (dram_cmds.act[k]) begin act_t.push_back(cyc); act_row.push_back(int'(dram_cmds.addr[k])); end
          if (dram_cmds.rd[k]) begin rd_t.push_back(cyc); due.push_back(cyc + 5); end
        end
        if (dram_cmds.act == 4'b0001 && dram_cmds.pre == 4'b0010 && dram_cmds.rd == 4'b0100 && dram_cmds.wr == 4'b1000) n_four++;
      end
      if (due.size() > max_inflight) max_inflight = due.size();
      if (!hold_returns && due.size() > 0 && due[0] <= cyc) begin void'(due.pop_front()); rd_return <= 1'b1; end
      if (done) n_done++;
    end
  end

  task automatic run(input logic [71:0] p [$], input int max_cycles);
    int n = 0, d0 = n_done;
    for (int i = 0; i < IMEM_DEPTH; i++) imem[i] = (i < p.size()) ? p[i] : '0;
    act_t.delete(); act_row.delete(); rd_t.delete();
    while (!idle) @(posedge clk);
    @(negedge clk); start = 1; start_pc = 0; start_src = 0;
    @(negedge clk); start = 0;
    while ((n_done == d0 || !idle) && n < max_cycles) begin @(posedge clk); n++; end
    check(n < max_cycles, "program finished and core idle");
    check(n_done == d0 + 1, "done pulsed once");
    #1;
  endtask

  initial begin
    logic [71:0] p [$];
    start = 0; start_pc = '0; start_src = 0; rb_free = 5'd16;
    for (int i = 0; i < IMEM_DEPTH; i++) imem[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    repeat (2) @(posedge clk);
    check(idle && !running, "idle after reset");

    // A: branch loop
    p.delete();
    p.push_back(i_li(4'd1, 16'd0));
    p.push_back(i_li(4'd2, 16'd5));
    p.push_back(i_li(4'd4, 16'd0));           // row register
    p.push_back(i_li(REG_RASR, 16'd1));
    p.push_back(i_dram1(DC_ACT, 4'b0010, 4'd0, 4'd4));  // 4: loop
    p.push_back(i_addi(4'd1, 4'd1, 16'd1));
    p.push_back(i_bl(4'd1, 4'd2, 12'd4));
    p.push_back(i_ldpc(4'd6, PC_DRAMCMDS));
    p.push_back(i_ldpc(4'd7, PC_READS));
    p.push_back(i_op(OP_END));
    run(p, 500);
    check(act_t.size() == 5, $sformatf("%0d ACTs", act_t.size()));
    for (int k = 0; k < act_t.size(); k++) check(act_row[k] == k, "row post-increment");
    for (int k = 1; k < act_t.size(); k++) check(act_t[k] - act_t[k-1] == 8, $sformatf("loop period %0d", act_t[k] - act_t[k-1]));
    check(dut.u_rf.regs[1] == 5 && dut.u_rf.regs[4] == 5, "loop registers");
    check(dut.u_rf.regs[6] == 5 && dut.u_rf.regs[7] == 0, "LDPC counters");

    // B: SLEEP and four commands in one instruction
    p.delete();
    p.push_back(i_dram1(DC_ACT, 4'b0000, 4'd0, 4'd0));
    p.push_back(i_sleep(16'd10));
    p.push_back(i_dram1(DC_ACT, 4'b0000, 4'd0, 4'd0));
    p.push_back(enc_dram(enc_cmd(DC_ACT, 4'b0, 4'd0, 4'd0), enc_cmd(DC_PRE, 4'b0, 4'd0, 4'd0),
                         enc_cmd(DC_READ, 4'b0, 4'd0, 4'd0), enc_cmd(DC_WRITE, 4'b0, 4'd0, 4'd0)));
    p.push_back(i_op(OP_END));
    run(p, 500);
    check(act_t.size() == 3 && act_t[1] - act_t[0] == 12, "SLEEP 10 between commands: 12 cycles");
    check(act_t.size() == 3 && act_t[2] - act_t[1] == 1, "next instruction in the next cycle");
    check(n_four == 1, "four commands in one cycle, slot order");

    // C: scratchpad, bypass, ALU, BEQ, JUMP
    p.delete();
    p.push_back(i_li(4'd1, 16'd9));
    p.push_back(i_li(4'd2, 16'h1234));
    p.push_back(i_st(4'd1, 4'd2));            // sp[9] = 0x1234
    p.push_back(i_ld(4'd3, 4'd1));            // R3 = sp[9]
    p.push_back(i_alu(FN_ADD, 4'd4, 4'd3, 4'd3));   // needs the loaded value at once
    p.push_back(i_alu(FN_SRC, 4'd5, 4'd1, 4'd0));   // rotate 9 right
    p.push_back(i_alu(FN_SUB, 4'd6, 4'd1, 4'd2));
    p.push_back(i_beq(4'd1, 4'd2, 12'd20));   // not taken
    p.push_back(i_beq(4'd1, 4'd1, 12'd11));   // taken
    p.push_back(i_li(4'd7, 16'd1));           // skipped
    p.push_back(i_li(4'd7, 16'd2));           // skipped
    p.push_back(i_jump(16'd13));              // 11
    p.push_back(i_li(4'd8, 16'd1));           // skipped
    p.push_back(i_li(4'd9, 16'd77));          // 13
    p.push_back(i_op(OP_END));
    run(p, 500);
    check(dut.u_rf.regs[3] == 32'h1234, "LD after ST");
    check(dut.u_rf.regs[4] == 32'h2468, "ADD uses the load result (bypass)");
    check(dut.u_rf.regs[5] == 32'h8000_0004, "SRC rotate right");
    check(dut.u_rf.regs[6] == 32'(9 - 32'h1234), "SUB");
    check(dut.u_rf.regs[7] == 0 && dut.u_rf.regs[8] == 0 && dut.u_rf.regs[9] == 77, "BEQ and JUMP control flow");

    // D: readback hints with two free entries and returns held back
    rb_free = 5'd2;
    p.delete();
    p.push_back(i_li(4'd1, 16'd0));
    p.push_back(i_li(4'd2, 16'd6));
    p.push_back(i_rbhint(16'd1));             // 2: loop
    p.push_back(i_dram1(DC_READ, 4'b0000, 4'd0, 4'd0));
    p.push_back(i_addi(4'd1, 4'd1, 16'd1));
    p.push_back(i_bl(4'd1, 4'd2, 12'd2));
    p.push_back(i_op(OP_END));
    max_inflight = 0;
    fork
      begin hold_returns = 1; repeat (60) @(posedge clk); hold_returns = 0; t_release = cyc; end
      run(p, 1000);
    join
    check(rd_t.size() == 6, $sformatf("%0d READs", rd_t.size()));
    check(max_inflight == 2, $sformatf("at most two READs in flight (%0d)", max_inflight));
    check(rd_t.size() == 6 && rd_t[1] < t_release && rd_t[2] > t_release, "third READ waited for returns");
    check(pending_reads == 0, "all READs returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
