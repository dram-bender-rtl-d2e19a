// tb_periodic_op_scheduler: the scheduler with short periods and a simple
// core model (a started program keeps the core busy for a random 5..40
// cycles, 5..6 in the priority test).  Checks:
//   - a program starts only when the core is idle, never two at once;
//   - over a long run each operation is started once per period elapsed
//     (floor(T / period), or one less for one still waiting), and refresh
//     only after the host enables it;
//   - with all three pending together the order is refresh, ZQS, periodic
//     READ, and a user start waits until none is pending;
//   - user programs start at address 0 of the user memory (start_src = 0),
//     maintenance programs at their own base in the scheduler's memory;
//   - the stored programs, read back through the two-cycle port, hold a
//     PRE-all, the maintenance command and an END, with SLEEP in between.
module tb_periodic_op_scheduler;
  import bender_pkg::*;
  localparam int unsigned PRD = 50, ZQ = 120, REFP = 70, AW = 11;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  pos_cfg_t cfg;
  logic user_start, core_idle, start, start_src, pm_ren;
  logic [AW-1:0] start_pc, pm_raddr;
  logic [INSTR_W-1:0] pm_rdata;
  logic [15:0] n_prd, n_zq, n_ref;

  periodic_op_scheduler #(.PRD_PERIOD(PRD), .ZQ_PERIOD(ZQ), .AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // core model
  int busy_left = 0;
  bit force_busy = 0;
  int max_busy = 40;
  int g_ref = 0, g_zq = 0, g_prd = 0, g_user = 0;
  int order_q [$];
  assign core_idle = (busy_left == 0) && !force_busy;
  always @(posedge clk) begin
    if (!rst && start) begin
      check(core_idle, "start only when idle");
      if (!start_src) begin g_user++; check(start_pc == 0, "user program at 0"); order_q.push_back(3); end
      else if (start_pc == 32) begin g_ref++; order_q.push_back(0); end
      else if (start_pc == 16) begin g_zq++; order_q.push_back(1); end
      else if (start_pc == 0)  begin g_prd++; order_q.push_back(2); end
      else check(0, "unknown start address");
      busy_left <= $urandom_range(5, max_busy);
    end else if (busy_left > 0) busy_left <= busy_left - 1;
  end

  task automatic read_pm(input int a, output logic [INSTR_W-1:0] d);
    @(negedge clk); pm_ren = 1; pm_raddr = AW'(a);
    @(posedge clk); @(posedge clk); #1; d = pm_rdata;
  endtask

  function automatic bit has_cmd(input logic [INSTR_W-1:0] i, input dram_cmd_e c);
    if (i[71:66] == 0) return 0;
    for (int k = 0; k < 4; k++) if (i[18*k+12 +: 4] == c) return 1;
    return 0;
  endfunction

  task automatic check_prog(input int base, input dram_cmd_e c, input string nm);
    logic [INSTR_W-1:0] d;
    bit seen_pre = 0, seen_cmd = 0, seen_end = 0, seen_sleep = 0;
    for (int a = base; a < base + 16 && !seen_end; a++) begin
      read_pm(a, d);
      if (has_cmd(d, DC_PRE) && !seen_cmd) seen_pre = 1;
      if (has_cmd(d, c)) seen_cmd = seen_pre;
      if (d[71:66] == 0 && d[63:59] == 5'(OP_SLEEP) && seen_cmd) seen_sleep = 1;
      if (d[71:66] == 0 && d[63:59] == 5'(OP_END)) seen_end = seen_cmd;
    end
    check(seen_pre && seen_cmd && seen_sleep && seen_end, {nm, " program: PRE-all, command, SLEEP, END"});
  endtask

  initial begin
    int t0;
    cfg = '{ref_en: 1'b0, zq_en: 1'b1, prd_en: 1'b1, ref_period: 32'(REFP)};
    user_start = 0; pm_ren = 0; pm_raddr = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    check_prog(0, DC_READ, "periodic READ");
    check_prog(16, DC_ZQS, "ZQS");
    check_prog(32, DC_REF, "refresh");
    pm_ren = 0;
    // long run, refresh disabled: 30 * ZQ cycles
    @(negedge clk); g_ref = 0; g_zq = 0; g_prd = 0;
    repeat (ZQ * 30) @(posedge clk);
    #1;
    check(g_ref == 0 && n_ref == 0, "no refresh while disabled");
    check(g_zq >= 29 && g_zq <= 30, $sformatf("ZQS started %0d times", g_zq));
    check(g_prd >= ZQ * 30 / PRD - 2 && g_prd <= ZQ * 30 / PRD + 1, $sformatf("periodic READ started %0d times", g_prd));
    check(n_prd == 16'(g_prd + 0) || n_prd == 16'(g_prd), "n_prd counter");
    // enable refresh
    @(negedge clk); cfg.ref_en = 1; g_ref = 0;
    repeat (REFP * 20) @(posedge clk);
    #1 check(g_ref >= 19 && g_ref <= 20, $sformatf("refresh started %0d times", g_ref));
    check(n_ref == 16'(g_ref), "n_ref counter");
    // priority: keep the core busy until everything is pending
    @(negedge clk); force_busy = 1; busy_left = 0; max_busy = 6;
    repeat (ZQ + 5) @(posedge clk);
    // stop further expiries so the four grants can be told apart
    @(negedge clk); user_start = 1; cfg.prd_en = 0; cfg.ref_period = 32'd1_000_000;
    @(negedge clk); user_start = 0;
    order_q.delete();
    force_busy = 0;
    t0 = 0;
    while (order_q.size() < 4 && t0 < 1000) begin @(posedge clk); t0++; end
    check(order_q.size() >= 4 && order_q[0] == 0 && order_q[1] == 1 && order_q[2] == 2 && order_q[3] == 3,
          "priority refresh > ZQS > periodic READ > user");
    check(g_user == 1, "user program started once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
