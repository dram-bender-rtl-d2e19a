// tb_dram_bender_top: end-to-end test of the DRAM Bender hardware.
//
// A host model drives the AXI4-Stream link (LOAD / CONFIG / START packets)
// and collects readback transfers; a behavioural DDR4 PHY + module model
// answers on the DFI side.  Three programs run:
//   P1  fills the wide-data register, opens a row, writes 8 columns in a
//       branch loop, reads them back in a hinted loop, exercises
//       ST/LD (with the load bypass), ALU ops, LDPC, a multi-command DRAM
//       instruction with bank auto-increment, and self-refresh entry/exit.
//       The host holds the link busy at first so the small readback FIFO
//       fills and the READ loop stalls on its hints.
//   P2  issues six READs with no hint into a full FIFO: overflow.
//   P3  none: with refresh enabled the scheduler runs refresh, ZQS and
//       periodic READ programs while the core is idle.
// Checks: every readback word against values worked out by hand from the
// program; cycle distances of DRAM commands (SLEEP, branch penalty of six
// cycles, four commands in one cycle on phases 0..3); no maintenance
// command while a user program runs; periodic READ data never reaches the
// host; each mechanism (branch, SLEEP, readback stall, overflow, refresh,
// ZQS, periodic READ, self-refresh entry/exit, load bypass) happens.
module tb_dram_bender_top;
  import bender_pkg::*;
  import bender_prog::*;

  localparam int unsigned RB_DEPTH = 4;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic s_tvalid, s_tready, s_tlast, m_tvalid, m_tready, m_tlast;
  logic [255:0] s_tdata, m_tdata;
  logic [3:0] cs_n, act_n, ras_n, cas_n, we_n, cke, wen;
  logic [3:0][1:0] bg, ba;
  logic [3:0][13:0] addr;
  logic [511:0] wrdata, rdd;
  logic rdv, running, done, ovf;
  logic [15:0] n_prd, n_zq, n_ref;

  dram_bender_top #(.RB_DEPTH(RB_DEPTH), .PRD_PERIOD(400), .ZQ_PERIOD(900)) dut (
    .clk, .rst,
    .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready), .s_axis_tdata(s_tdata), .s_axis_tlast(s_tlast),
    .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tdata(m_tdata), .m_axis_tlast(m_tlast),
    .dfi_cs_n(cs_n), .dfi_act_n(act_n), .dfi_ras_n(ras_n), .dfi_cas_n(cas_n), .dfi_we_n(we_n),
    .dfi_bg(bg), .dfi_ba(ba), .dfi_addr(addr), .dfi_cke(cke), .dfi_wrdata_en(wen), .dfi_wrdata(wrdata),
    .phy_rd_valid(rdv), .phy_rd_data(rdd),
    .core_running(running), .program_done(done), .rb_overflow(ovf),
    .n_prd, .n_zq, .n_ref
  );

  ddr4_phy_model #(.RD_LAT(6)) phy (
    .clk, .rst, .dfi_cs_n(cs_n), .dfi_act_n(act_n), .dfi_ras_n(ras_n), .dfi_cas_n(cas_n),
    .dfi_we_n(we_n), .dfi_bg(bg), .dfi_ba(ba), .dfi_addr(addr), .dfi_cke(cke),
    .dfi_wrdata_en(wen), .dfi_wrdata(wrdata), .phy_rd_valid(rdv), .phy_rd_data(rdd)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- host side ----------------
  logic [511:0] rx_q [$];
  logic [255:0] lo_half;
  bit           have_lo = 0;
  always @(posedge clk) begin
    if (!rst && m_tvalid && m_tready) begin
      if (!m_tlast) begin lo_half = m_tdata; have_lo = 1; end
      else begin rx_q.push_back({m_tdata, lo_half}); have_lo = 0; end
    end
  end

  // one beat per call; the link goes idle only when a packet sequence ends
  task automatic beat(input logic [255:0] d);
    s_tdata  <= d; s_tvalid <= 1'b1; s_tlast <= 1'b1;
    @(posedge clk);
  endtask

  task automatic send(input logic [255:0] d);
    beat(d);
    s_tvalid <= 1'b0;
  endtask

  task automatic load(input logic [71:0] p [$]);
    beat({208'd0, 16'd0, 16'(p.size()), 12'd0, 4'd1});
    for (int i = 0; i < p.size(); i++) beat(256'(p[i]));
    s_tvalid <= 1'b0;
  endtask

  task automatic wait_done(input int unsigned max_cycles);
    int unsigned n = 0;
    while (!(done && !dut.cur_src) && n < max_cycles) begin @(posedge clk); n++; end
    check(n < max_cycles, "user program finished");
  endtask

  // ---------------- mechanism counters and monitors ----------------
  int unsigned n_branch = 0, n_sleep = 0, n_rbstall = 0, n_bypass = 0, n_maint_in_user = 0;
  int unsigned cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (!rst) begin
      if (dut.u_core.u_exec.redirect) n_branch++;
      if (dut.u_core.u_decode.stall && dut.u_core.u_decode.op == OP_SLEEP) n_sleep++;
      if (dut.u_core.u_decode.stall && dut.u_core.u_decode.op == OP_RBHINT) n_rbstall++;
      if (dut.u_core.wl_en && dut.u_core.u_exec.ex2.valid &&
          (dut.u_core.u_exec.ex2.rs1 == dut.u_core.wl_addr || dut.u_core.u_exec.ex2.rs2 == dut.u_core.wl_addr)) n_bypass++;
      // user program running: no REF / ZQS may appear on the DFI port
      if (running && !dut.cur_src)
        for (int p = 0; p < 4; p++)
          if (!cs_n[p] && act_n[p] && ({ras_n[p], cas_n[p], we_n[p]} inside {3'b001, 3'b110}) && cke[p])
            n_maint_in_user++;
    end
  end

  int watchdog_done = 0;
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected P1 data
  function automatic logic [511:0] p1_write(input int k);
    logic [511:0] d;
    for (int i = 0; i < 16; i++) d[32*i +: 32] = 32'h1000 + i;
    d[31:0] = (k == 0) ? 32'h1000 : 32'h1010 + k;
    return d;
  endfunction

  initial begin
    logic [71:0] p [$];
    logic [511:0] exp_last;
    int idx_before, log_base, n_hosts;
    int t_act, t_wr [$], t_rd [$];
    s_tvalid = 0; s_tdata = '0; s_tlast = 0; m_tready = 0;
    repeat (5) @(posedge clk);
    rst <= 1'b0;
    repeat (5) @(posedge clk);

    // ------------------------------------------------ P1
    p.delete();
    p.push_back(i_li(4'd5, 16'd2));          // 0 bank 2
    p.push_back(i_li(4'd4, 16'd100));        // 1 row 100
    p.push_back(i_li(4'd3, 16'd0));          // 2 column
    p.push_back(i_li(REG_CASR, 16'd8));      // 3
    p.push_back(i_li(4'd6, 16'd64));         // 4 last column
    p.push_back(i_li(4'd1, 16'h1000));       // 5
    for (int i = 0; i < 16; i++) begin       // 6..37
      p.push_back(i_ldwd(4'd1, 16'(i)));
      p.push_back(i_addi(4'd1, 4'd1, 16'd1));
    end
    p.push_back(i_li(4'd1, 16'h1010));       // 38
    p.push_back(i_dram1(DC_ACT, 4'b0000, 4'd5, 4'd4));   // 39
    p.push_back(i_sleep(16'd3));             // 40
    p.push_back(i_dram1(DC_WRITE, 4'b0010, 4'd5, 4'd3)); // 41 loop W
    p.push_back(i_addi(4'd1, 4'd1, 16'd1));  // 42
    p.push_back(i_ldwd(4'd1, 16'd0));        // 43
    p.push_back(i_bl(4'd3, 4'd6, 12'd41));   // 44
    p.push_back(i_li(4'd3, 16'd0));          // 45
    p.push_back(i_rbhint(16'd1));            // 46 loop R
    p.push_back(i_dram1(DC_READ, 4'b0010, 4'd5, 4'd3));  // 47
    p.push_back(i_bl(4'd3, 4'd6, 12'd46));   // 48
    p.push_back(i_dram1(DC_PRE, 4'b0000, 4'd5, 4'd5));   // 49
    p.push_back(i_li(4'd7, 16'd5));          // 50
    p.push_back(i_li(4'd8, 16'hBEEF));       // 51
    p.push_back(i_st(4'd7, 4'd8));           // 52
    p.push_back(i_ld(4'd9, 4'd7));           // 53
    p.push_back(i_alu(FN_ADD, 4'd10, 4'd9, 4'd9));  // 54 uses the load at once
    p.push_back(i_ldwd(4'd10, 16'd2));       // 55
    p.push_back(i_alu(FN_SRC, 4'd11, 4'd8, 4'd0));  // 56
    p.push_back(i_ldwd(4'd11, 16'd3));       // 57
    p.push_back(i_alu(FN_XOR, 4'd2, 4'd8, 4'd7));   // 58
    p.push_back(i_ldwd(4'd2, 16'd4));        // 59
    p.push_back(i_ldpc(4'd0, PC_READS));     // 60
    p.push_back(i_ldwd(4'd0, 16'd5));        // 61
    p.push_back(i_ldpc(4'd0, PC_DRAMCMDS));  // 62
    p.push_back(i_ldwd(4'd0, 16'd6));        // 63
    p.push_back(i_dram1(DC_ACT, 4'b0000, 4'd5, 4'd4));   // 64
    p.push_back(i_sleep(16'd3));             // 65
    p.push_back(i_dram1(DC_WRITE, 4'b0000, 4'd5, 4'd3)); // 66 column 64
    p.push_back(i_sleep(16'd2));             // 67
    p.push_back(i_rbhint(16'd1));            // 68
    p.push_back(i_dram1(DC_READ, 4'b0000, 4'd5, 4'd3));  // 69
    p.push_back(i_sleep(16'd2));             // 70
    p.push_back(i_li(REG_BASR, 16'd1));      // 71
    p.push_back(enc_dram(enc_cmd(DC_ACT, 4'b0001, 4'd5, 4'd4), cmd_nop(),          // 72
                         enc_cmd(DC_ACT, 4'b0000, 4'd5, 4'd4), enc_cmd(DC_PRE, 4'b0100, 4'd5, 4'd5)));
    p.push_back(i_op(OP_SRE));               // 73
    p.push_back(i_sleep(16'd10));            // 74
    p.push_back(i_op(OP_SRX));               // 75
    p.push_back(i_op(OP_END));               // 76
    load(p);
    repeat (4) @(posedge clk);
    log_base = phy.log_q.size();
    send({252'd0, 4'd2});                    // START
    fork
      begin repeat (300) @(posedge clk); m_tready <= 1'b1; end
    join_none
    wait_done(20000);
    repeat (50) @(posedge clk);

    // readback data
    check(rx_q.size() == 9, $sformatf("P1 readback count %0d", rx_q.size()));
    for (int k = 0; k < 8 && k < rx_q.size(); k++)
      check(rx_q[k] == p1_write(k), $sformatf("P1 read %0d data", k));
    exp_last = p1_write(0);
    exp_last[31:0]    = 32'h1018;
    exp_last[95:64]   = 32'h17DDE;
    exp_last[127:96]  = 32'h8000_5F77;
    exp_last[159:128] = 32'hBEEA;
    exp_last[191:160] = 32'd8;
    exp_last[223:192] = 32'd18;
    if (rx_q.size() >= 9) check(rx_q[8] == exp_last, "P1 ALU/LD/ST/LDPC word");
    if (rx_q.size() >= 9) for (int w = 0; w < 7; w++)
      check(rx_q[8][32*w +: 32] == exp_last[32*w +: 32], $sformatf("P1 last word %0d = %h", w, rx_q[8][32*w +: 32]));

    // command timing from the PHY log (kind 0 ACT, 1 PRE, 2 READ, 3 WRITE)
    t_act = -1;
    for (int i = log_base; i < phy.log_q.size(); i++) begin
      if (phy.log_q[i].bank == 2 && phy.log_q[i].kind == 0 && t_act < 0) t_act = int'(phy.log_q[i].cycle);
      if (phy.log_q[i].bank == 2 && phy.log_q[i].kind == 3) t_wr.push_back(int'(phy.log_q[i].cycle));
      if (phy.log_q[i].bank == 2 && phy.log_q[i].kind == 2) t_rd.push_back(int'(phy.log_q[i].cycle));
    end
    check(t_wr.size() == 9 && t_rd.size() == 9, $sformatf("P1 %0d writes %0d reads", t_wr.size(), t_rd.size()));
    if (t_wr.size() == 9) begin
      check(t_wr[0] - t_act == 5, $sformatf("ACT->WRITE across SLEEP 3: %0d cycles", t_wr[0] - t_act));
      for (int k = 1; k < 8; k++)
        check(t_wr[k] - t_wr[k-1] == 9, $sformatf("write loop period %0d (3 + six-cycle branch)", t_wr[k] - t_wr[k-1]));
    end
    if (t_rd.size() == 9) begin
      int min_d = 1000;
      for (int k = 1; k < 8; k++) if (t_rd[k] - t_rd[k-1] < min_d) min_d = t_rd[k] - t_rd[k-1];
      check(min_d == 8, $sformatf("read loop period without stall %0d", min_d));
    end
    // multi-command instruction: ACT b2 phase0, ACT b3 phase2, PRE-all phase3 in one cycle
    begin
      int found = 0;
      for (int i = log_base; i + 2 < phy.log_q.size(); i++) begin
        if (phy.log_q[i].kind == 0 && phy.log_q[i].bank == 2 && phy.log_q[i].phase == 0 &&
            phy.log_q[i+1].kind == 0 && phy.log_q[i+1].bank == 3 && phy.log_q[i+1].phase == 2 &&
            phy.log_q[i+2].kind == 1 && phy.log_q[i+2].phase == 3 && phy.log_q[i+2].addr == 1 &&
            phy.log_q[i].cycle == phy.log_q[i+1].cycle && phy.log_q[i+1].cycle == phy.log_q[i+2].cycle)
          found++;
      end
      check(found == 1, "four-slot instruction: commands on phases 0, 2, 3 of one cycle, bank stride applied");
    end
    check(phy.n_sre >= 1 && phy.n_srx >= 1, "self-refresh entry and exit seen on CKE");

    // ------------------------------------------------ P2: overflow
    m_tready <= 1'b0;
    rx_q.delete();
    p.delete();
    p.push_back(i_li(4'd5, 16'd1));
    p.push_back(i_li(4'd4, 16'd7));
    p.push_back(i_li(4'd3, 16'd0));
    p.push_back(i_li(REG_CASR, 16'd8));
    p.push_back(i_dram1(DC_ACT, 4'b0000, 4'd5, 4'd4));
    p.push_back(i_sleep(16'd3));
    p.push_back(enc_dram(enc_cmd(DC_READ, 4'b0010, 4'd5, 4'd3), enc_cmd(DC_READ, 4'b0010, 4'd5, 4'd3),
                         enc_cmd(DC_READ, 4'b0010, 4'd5, 4'd3), enc_cmd(DC_READ, 4'b0010, 4'd5, 4'd3)));
    p.push_back(enc_dram(enc_cmd(DC_READ, 4'b0010, 4'd5, 4'd3), enc_cmd(DC_READ, 4'b0010, 4'd5, 4'd3),
                         cmd_nop(), cmd_nop()));
    p.push_back(i_sleep(16'd4));
    p.push_back(i_dram1(DC_PRE, 4'b0000, 4'd5, 4'd5));
    p.push_back(i_op(OP_END));
    load(p);
    repeat (4) @(posedge clk);
    send({252'd0, 4'd2});
    wait_done(5000);
    repeat (30) @(posedge clk);
    check(ovf == 1'b1, "overflow flag after unhinted READs into a full FIFO");
    m_tready <= 1'b1;
    repeat (30) @(posedge clk);
    check(rx_q.size() == RB_DEPTH, $sformatf("P2 kept %0d transfers", rx_q.size()));
    send({252'd0, 4'd4});
    repeat (2) @(posedge clk);
    check(ovf == 1'b0, "overflow cleared by host");

    // ------------------------------------------------ P3: maintenance
    rx_q.delete();
    begin
      int unsigned r0 = phy.n_ref, z0 = phy.n_zqs, p0 = n_prd;
      send({192'd0, 32'd300, 25'd0, 3'b111, 4'd3});   // CONFIG: prd, zq, ref on; refresh every 300 cycles
      repeat (2500) @(posedge clk);
      check(phy.n_ref - r0 >= 5, $sformatf("refreshes issued: %0d", phy.n_ref - r0));
      check(n_ref >= 5, "scheduler counted refreshes");
      check(phy.n_zqs - z0 >= 1, "ZQS issued");
      check(n_prd - p0 >= 1, "periodic READ run");
      check(rx_q.size() == 0, "periodic READ data not sent to the host");
    end

    // mechanisms
    check(n_branch >= 16, $sformatf("branches resolved: %0d", n_branch));
    check(n_sleep > 0, "SLEEP stalls happened");
    check(n_rbstall > 0, $sformatf("readback-hint stalls: %0d", n_rbstall));
    check(n_bypass > 0, "load result bypassed to next instruction");
    check(n_maint_in_user == 0, "no maintenance command during a user program");
    $display("mechanisms: branch=%0d sleep=%0d rbstall=%0d bypass=%0d prd=%0d zq=%0d ref=%0d sre=%0d srx=%0d",
             n_branch, n_sleep, n_rbstall, n_bypass, n_prd, n_zq, n_ref, phy.n_sre, phy.n_srx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
