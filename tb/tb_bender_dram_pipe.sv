// tb_bender_dram_pipe: random four-slot DRAM micro-ops against a reference
// model of address generation.  The testbench holds the register file
// itself and applies the pipeline's bulk writes.  For each slot the model
// reads bank = reg[A], address = reg[B] using the values left by the slots
// before it in the same instruction, then post-increments reg[A] by the
// bank stride (BASR) and reg[B] by the row stride (RASR) for ACT or the
// column stride (CASR) for READ / WRITE when the slot's flags ask for it.
// A micro-op in DRAM1 at edge t writes the registers during the cycle after
// edge t (DRAM2) and has its commands on the outputs after edge t+1
// (DRAM3); the wide-data register is captured with a WRITE.
module tb_bender_dram_pipe;
  import bender_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  dram_uop_t uop_in;
  logic [NREG-1:0][XLEN-1:0] rf, wb_data, model;
  logic [NREG-1:0] wb_mask;
  logic [WIDE_W-1:0] wide, out_wdata;
  logic out_valid, busy;
  dram_cmds_t out_cmds;

  bender_dram_pipe dut (.*);

  always_ff @(posedge clk)
    for (int i = 0; i < NREG; i++) if (wb_mask[i]) rf[i] <= wb_data[i];

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam dram_cmd_e CMDS [10] = '{DC_NONE, DC_NOP, DC_ACT, DC_PRE, DC_READ, DC_WRITE, DC_REF, DC_ZQS, DC_SRE, DC_SRX};

  int n_inc = 0, n_chain = 0;
  initial begin
    uop_in = '0; wide = '0;
    for (int i = 0; i < NREG; i++) rf[i] = $urandom_range(100);
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 3000; n++) begin
      dram_uop_t u;
      logic [NSLOT-1:0][3:0] eb;
      logic [NSLOT-1:0][16:0] ea;
      logic [WIDE_W-1:0] wd;
      bit any_wr;
      @(negedge clk);
      u = '0; u.valid = 1; any_wr = 0;
      for (int k = 0; k < NSLOT; k++) begin
        u.slot[k].cmd = CMDS[$urandom_range(9)];
        u.slot[k].flags = 4'($urandom);
        u.slot[k].ra = 4'($urandom_range(2));      // few registers: chains within an instruction
        u.slot[k].rb = 4'($urandom_range(3, 5));
      end
      for (int i = 0; i < 16; i++) wd[32*i +: 32] = $urandom;
      uop_in = u;
      @(posedge clk); #1;
      uop_in = '0;
      wide = wd;
      // DRAM2: reference model
      model = rf;
      for (int k = 0; k < NSLOT; k++) begin
        automatic dram_slot_t s = u.slot[k];
        eb[k] = model[s.ra][3:0];
        ea[k] = model[s.rb][16:0];
        if (s.cmd inside {DC_ACT, DC_PRE, DC_READ, DC_WRITE}) begin
          if (s.flags[0]) begin model[s.ra] += model[13]; n_inc++; end
          if (s.flags[1] && s.cmd == DC_ACT) begin model[s.rb] += model[14]; n_inc++; end
          if (s.flags[1] && s.cmd inside {DC_READ, DC_WRITE}) begin model[s.rb] += model[15]; n_inc++; end
          if (k > 0 && (s.flags[0] || s.flags[1])) n_chain++;
        end
        if (s.cmd == DC_WRITE) any_wr = 1;
      end
      check(!out_valid, "commands not out before DRAM3");
      @(posedge clk); #1;
      check(rf == model, "registers after post-increment");
      check(out_valid, "commands out in DRAM3");
      for (int k = 0; k < NSLOT; k++) begin
        automatic dram_cmd_e c = u.slot[k].cmd;
        check(out_cmds.act[k] == (c == DC_ACT) && out_cmds.pre[k] == (c == DC_PRE) &&
              out_cmds.rd[k] == (c == DC_READ) && out_cmds.wr[k] == (c == DC_WRITE) &&
              out_cmds.refr[k] == (c == DC_REF) && out_cmds.zqs[k] == (c == DC_ZQS) &&
              out_cmds.sre[k] == (c == DC_SRE) && out_cmds.srx[k] == (c == DC_SRX), $sformatf("slot %0d strobe", k));
        check(out_cmds.bank[k] == eb[k] && out_cmds.addr[k] == ea[k], $sformatf("slot %0d address", k));
        check(out_cmds.ap[k] == u.slot[k].flags[2] && out_cmds.bc[k] == u.slot[k].flags[3], "flags");
      end
      if (any_wr) check(out_wdata == wd, "write data captured");
      if (n % 50 == 0) for (int i = 13; i < 16; i++) rf[i] = $urandom_range(9);
    end
    check(n_inc > 100 && n_chain > 100, "increments and in-instruction chains exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
