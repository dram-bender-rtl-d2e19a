// tb_workloads: the two command-timing experiments the infrastructure was
// built for, run end to end on the DRAM Bender hardware at its default sizes
// (no parameter overrides), against the behavioural DDR4 PHY/module model.
//
// W1, double-sided RowHammer with an interleaving factor T.  Three victim
// rows (9, 11, 13 of bank 1) are written with a random data pattern.  The two
// aggressor rows (10 and 12) are then hammered in iterations of T ACTs to row
// 10 followed by T ACTs to row 12.  Each ACT has its PRE placed by a SLEEP,
// and the total is a fixed 32 ACTs, scaled down from one million.  Finally
// the victim rows are read back.  T sweeps 1, 2, 4, 8, 16.  Checks:
//   - the ACT row sequence matches T;
//   - each ACT is followed by its PRE 6 cycles later (SLEEP 4 + 2);
//   - back-to-back ACTs to one row are 14 cycles apart (6 + ADDI + BL + 6);
//   - every victim transfer reads back the written pattern.  The model has
//     no disturbance errors, so the bit-flip count must be zero.
// W2, ACT-PRE-ACT at command-slot resolution.  An ACT, a PRE after N slots
// and a second ACT after M more slots are packed into consecutive DRAM
// instructions.  The pairs are four corner cases plus six random pairs from
// 1..10 slots.  Checks: the distances on the DFI bus, counted in phases
// (1.5 ns each at DDR4-1333), equal N and M.
module tb_workloads;
  import bender_pkg::*;
  import bender_prog::*;

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

  dram_bender_top dut (
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
  always @(posedge clk) begin
    if (!rst && m_tvalid && m_tready) begin
      if (!m_tlast) lo_half = m_tdata;
      else rx_q.push_back({m_tdata, lo_half});
    end
  end

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

  // load, start and wait; returns the index of the first PHY log entry of the run
  task automatic run(input logic [71:0] p [$], output int base);
    load(p);
    repeat (4) @(posedge clk);
    while (running) @(posedge clk);        // let a maintenance program finish
    base = phy.log_q.size();
    send({252'd0, 4'd2});                  // START
    wait_done(50000);
    repeat (40) @(posedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int unsigned NACT = 32;        // total hammer ACTs per T
  localparam int unsigned NCOL = 4;         // columns tested per victim row
  localparam logic [3:0]  RBANK = 4'd5, RROW = 4'd4, RCOL = 4'd3, RA1 = 4'd1, RA2 = 4'd2,
                          RCNT = 4'd3, RT = 4'd7, RIT = 4'd8, RNIT = 4'd9, RTMP = 4'd10;

  // victim rows: ACT, 4 column accesses (column stride 8), PRE
  task automatic victim_pass(ref logic [71:0] p [$], input dram_cmd_e c);
    for (int v = 9; v <= 13; v += 2) begin
      p.push_back(i_li(RROW, 16'(v)));
      p.push_back(i_li(RCOL, 16'd0));
      p.push_back(i_dram1(DC_ACT, 4'b0000, RBANK, RROW));
      p.push_back(i_sleep(16'd3));
      for (int k = 0; k < NCOL; k++) begin
        p.push_back(i_dram1(c, 4'b0010, RBANK, RCOL));
        p.push_back(i_sleep(16'd1));
      end
      p.push_back(i_sleep(16'd2));
      p.push_back(i_dram1(DC_PRE, 4'b0000, RBANK, RBANK));
      p.push_back(i_sleep(16'd3));
    end
  endtask

  // hammer loop of Listing-2 form: ACT; wait; PRE; count; branch
  task automatic hammer_loop(ref logic [71:0] p [$], input logic [3:0] rrow);
    int unsigned lbl;
    p.push_back(i_li(RCNT, 16'd0));
    lbl = p.size();
    p.push_back(i_dram1(DC_ACT, 4'b0000, RBANK, rrow));
    p.push_back(i_sleep(16'd4));
    p.push_back(i_dram1(DC_PRE, 4'b0000, RBANK, RBANK));
    p.push_back(i_addi(RCNT, RCNT, 16'd1));
    p.push_back(i_bl(RCNT, RT, 12'(lbl)));
  endtask

  initial begin
    logic [71:0] p [$];
    int base;
    s_tvalid = 0; s_tdata = '0; s_tlast = 0; m_tready = 1;
    repeat (5) @(posedge clk);
    rst <= 1'b0;
    repeat (5) @(posedge clk);

    // ------------------------------------------------ W1: RowHammer, T sweep
    for (int t = 1; t <= 16; t *= 2) begin
      automatic logic [15:0] pat [16];
      automatic logic [511:0] exp_data = '0;
      automatic int unsigned niter = NACT / (2 * t);
      automatic int unsigned outer;
      automatic int unsigned act_t [$];
      automatic int unsigned act_row [$];
      automatic int unsigned pre_t [$];
      automatic int unsigned nflip = 0;
      automatic bit seq_ok = 1, pre_ok = 1, per_ok = 1;

      for (int w = 0; w < 16; w++) begin
        pat[w] = 16'($urandom);
        exp_data[32*w +: 32] = {16'd0, pat[w]};
      end
      p.delete();
      p.push_back(i_li(RBANK, 16'd1));
      p.push_back(i_li(REG_CASR, 16'd8));
      p.push_back(i_li(RA1, 16'd10));
      p.push_back(i_li(RA2, 16'd12));
      p.push_back(i_li(RT, 16'(t)));
      p.push_back(i_li(RNIT, 16'(niter)));
      for (int w = 0; w < 16; w++) begin
        p.push_back(i_li(RTMP, pat[w]));
        p.push_back(i_ldwd(RTMP, 16'(w)));
      end
      victim_pass(p, DC_WRITE);
      p.push_back(i_li(RIT, 16'd0));
      outer = p.size();
      hammer_loop(p, RA1);
      hammer_loop(p, RA2);
      p.push_back(i_addi(RIT, RIT, 16'd1));
      p.push_back(i_bl(RIT, RNIT, 12'(outer)));
      p.push_back(i_sleep(16'd3));
      p.push_back(i_rbhint(16'(3 * NCOL)));
      victim_pass(p, DC_READ);
      p.push_back(i_op(OP_END));
      rx_q.delete();
      run(p, base);

      // hammer ACTs (rows 10 and 12 of bank 1) and their PREs
      for (int i = base; i < phy.log_q.size(); i++) begin
        if (phy.log_q[i].bank != 1) continue;
        if (phy.log_q[i].kind == 0 && (phy.log_q[i].addr == 10 || phy.log_q[i].addr == 12)) begin
          act_t.push_back(phy.log_q[i].cycle);
          act_row.push_back(phy.log_q[i].addr);
          for (int j = i + 1; j < phy.log_q.size(); j++)
            if (phy.log_q[j].bank == 1 && phy.log_q[j].kind == 1) begin
              pre_t.push_back(phy.log_q[j].cycle);
              break;
            end
        end
      end
      check(act_t.size() == NACT, $sformatf("T=%0d: %0d hammer ACTs", t, act_t.size()));
      check(pre_t.size() == act_t.size(), $sformatf("T=%0d: every ACT has a PRE", t));
      for (int k = 0; k < act_t.size() && k < NACT; k++) begin
        if (act_row[k] != (((k / t) % 2 == 0) ? 10 : 12)) seq_ok = 0;
        if (k < pre_t.size() && pre_t[k] - act_t[k] != 6) pre_ok = 0;
        if (k > 0 && act_row[k] == act_row[k-1] && act_t[k] - act_t[k-1] != 14) per_ok = 0;
      end
      check(seq_ok, $sformatf("T=%0d: aggressor order is %0d x A1, %0d x A2, repeated", t, t, t));
      check(pre_ok, $sformatf("T=%0d: ACT -> PRE 6 cycles", t));
      check(per_ok, $sformatf("T=%0d: same-row ACT period 14 cycles", t));

      check(rx_q.size() == 3 * NCOL, $sformatf("T=%0d: %0d victim transfers", t, rx_q.size()));
      foreach (rx_q[k]) nflip += $countones(rx_q[k] ^ exp_data);
      check(nflip == 0, $sformatf("T=%0d: %0d bit flips in victim rows", t, nflip));
    end

    // ------------------------------------------------ W2: ACT-PRE-ACT distances
    begin
      int unsigned nn [10], mm [10];
      dram_cmd_e   sl [$];
      logic [3:0]  sb [$];
      int unsigned slot [$];
      int          i_act1, i_pre, i_act2, seg;
      nn[0] = 1;  mm[0] = 1;
      nn[1] = 10; mm[1] = 10;
      nn[2] = 1;  mm[2] = 10;
      nn[3] = 10; mm[3] = 1;
      for (int s = 4; s < 10; s++) begin nn[s] = 1 + $urandom % 10; mm[s] = 1 + $urandom % 10; end
      p.delete();
      p.push_back(i_li(RBANK, 16'd2));
      p.push_back(i_li(RA1, 16'd20));
      p.push_back(i_li(RA2, 16'd21));
      for (int s = 0; s < 10; s++) begin
        sl.delete(); sb.delete();
        sl.push_back(DC_ACT); sb.push_back(RA1);
        for (int k = 1; k < nn[s]; k++) begin sl.push_back(DC_NOP); sb.push_back(4'd0); end
        sl.push_back(DC_PRE); sb.push_back(RBANK);
        for (int k = 1; k < mm[s]; k++) begin sl.push_back(DC_NOP); sb.push_back(4'd0); end
        sl.push_back(DC_ACT); sb.push_back(RA2);
        while (sl.size() % 4 != 0) begin sl.push_back(DC_NOP); sb.push_back(4'd0); end
        for (int k = 0; k < sl.size(); k += 4)
          p.push_back(enc_dram(enc_cmd(sl[k],   4'b0000, RBANK, sb[k]),
                               enc_cmd(sl[k+1], 4'b0000, RBANK, sb[k+1]),
                               enc_cmd(sl[k+2], 4'b0000, RBANK, sb[k+2]),
                               enc_cmd(sl[k+3], 4'b0000, RBANK, sb[k+3])));
        p.push_back(i_sleep(16'd6));
        p.push_back(i_dram1(DC_PRE, 4'b0000, RBANK, RBANK));
        p.push_back(i_sleep(16'd6));
      end
      p.push_back(i_op(OP_END));
      run(p, base);

      seg = 0; i_act1 = -1; i_pre = -1;
      for (int i = base; i < phy.log_q.size(); i++) begin
        if (phy.log_q[i].bank != 2) continue;
        if (phy.log_q[i].kind == 0 && phy.log_q[i].addr == 20) begin i_act1 = i; i_pre = -1; end
        else if (phy.log_q[i].kind == 1 && i_act1 >= 0 && i_pre < 0) i_pre = i;
        else if (phy.log_q[i].kind == 0 && phy.log_q[i].addr == 21 && i_pre >= 0 && seg < 10) begin
          int unsigned s1, s2, s3;
          i_act2 = i;
          s1 = 4 * phy.log_q[i_act1].cycle + phy.log_q[i_act1].phase;
          s2 = 4 * phy.log_q[i_pre].cycle  + phy.log_q[i_pre].phase;
          s3 = 4 * phy.log_q[i_act2].cycle + phy.log_q[i_act2].phase;
          check(s2 - s1 == nn[seg] && s3 - s2 == mm[seg],
                $sformatf("segment %0d: ACT-PRE %0d slots (want %0d), PRE-ACT %0d slots (want %0d)",
                          seg, s2 - s1, nn[seg], s3 - s2, mm[seg]));
          seg++; i_act1 = -1; i_pre = -1;
        end
      end
      check(seg == 10, $sformatf("%0d of 10 ACT-PRE-ACT segments seen", seg));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
