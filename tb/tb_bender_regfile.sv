// tb_bender_regfile: random traffic on the four write ports of the register
// file against a reference model.  Checks: reset to zero; port A wins over
// the bulk port, which wins over the load port, for the same register; the
// load port is bypassed combinationally onto the read output in the cycle
// it writes; LDWD-style word writes land in the right 32 bits of the
// 512-bit wide-data register.
module tb_bender_regfile;
  import bender_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic [NREG-1:0][XLEN-1:0] rf, wb_data, model;
  logic [WIDE_W-1:0] wide, wmodel;
  logic wa_en, wl_en, ww_en;
  logic [3:0] wa_addr, wl_addr;
  logic [XLEN-1:0] wa_data, wl_data, ww_data;
  logic [NREG-1:0] wb_mask;
  logic [$clog2(WIDE_WORDS)-1:0] ww_idx;

  bender_regfile dut (.*);

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

  initial begin
    int n_bypass = 0, n_prio = 0;
    wa_en = 0; wl_en = 0; ww_en = 0; wb_mask = '0; wb_data = '0;
    wa_addr = 0; wl_addr = 0; wa_data = 0; wl_data = 0; ww_data = 0; ww_idx = 0;
    model = '0; wmodel = '0;
    repeat (3) @(posedge clk);
    #1; check(rf == '0 && wide == '0, "reset to zero");
    rst = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // port A and the bulk port never write together (DRAM and execute
      // pipelines do not both write in one cycle)
      wa_en = $urandom_range(3) == 0;
      wb_mask = wa_en ? '0 : (($urandom_range(3) == 0) ? 16'($urandom) : '0);
      for (int i = 0; i < NREG; i++) wb_data[i] = $urandom;
      wl_en = $urandom_range(2) == 0;
      wa_addr = 4'($urandom); wl_addr = 4'($urandom);
      if ($urandom_range(1)) wl_addr = wa_addr;
      wa_data = $urandom; wl_data = $urandom;
      ww_en = $urandom_range(1); ww_idx = 4'($urandom); ww_data = $urandom;
      #1;
      // read output: load port bypassed
      for (int i = 0; i < NREG; i++)
        check(rf[i] == ((wl_en && wl_addr == 4'(i)) ? wl_data : model[i]), $sformatf("read r%0d", i));
      if (wl_en) n_bypass++;
      for (int i = 0; i < NREG; i++) begin
        if (wa_en && wa_addr == 4'(i)) begin model[i] = wa_data; if (wl_en && wl_addr == 4'(i)) n_prio++; end
        else if (wb_mask[i]) model[i] = wb_data[i];
        else if (wl_en && wl_addr == 4'(i)) model[i] = wl_data;
      end
      if (ww_en) wmodel[32*ww_idx +: 32] = ww_data;
      @(posedge clk); #1;
      check(wide == wmodel, "wide-data register");
    end
    @(negedge clk); wa_en = 0; wl_en = 0; ww_en = 0; wb_mask = '0; #1;
    check(rf == model, "final registers");
    check(n_bypass > 0 && n_prio > 0, "bypass and port priority exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
