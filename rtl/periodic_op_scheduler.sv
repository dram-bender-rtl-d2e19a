// periodic_op_scheduler: keeps the DRAM module operating correctly by
// running short maintenance programs at fixed intervals (the "POS").
//
// It stores three DRAM Bender programs in a small program memory and runs
// them on the programmable core:
//   * periodic READ  (predefined period PRD_PERIOD): precharge all banks,
//     activate bank 0 row 0, read column 0, precharge all.  The PHY uses
//     such reads to keep its read-capture timing calibrated; their data is
//     discarded, not placed in the readback FIFO.
//   * ZQS            (predefined period ZQ_PERIOD): precharge all, ZQ short
//     calibration, wait tZQCS.
//   * refresh        (period set by the host in cfg.ref_period): precharge
//     all, REF, wait tRFC.
// Each has an enable in `cfg`; refresh is off until the host turns it on.
//
// Arbitration: a timer that expires marks its operation pending.  Whenever
// the core is idle, the scheduler starts the highest-priority pending
// program (refresh, then ZQS, then periodic READ) and otherwise a user
// program the frontend asked for.  A maintenance operation therefore never
// breaks into a running user program and its command timing; it waits for
// the program to end.  `start_src` = 1 tells the core to fetch from this
// module's program memory, read through `pm_*` with the same two-cycle
// latency as the instruction memory.
//
// The three programs and the predefined/configurable split are the paper's.
// Program contents, priorities, waiting for an idle core, the period values
// (1 us periodic read, 128 ms ZQ interval at a 166.67 MHz fabric clock,
// i.e. DDR4-1333 with 4:1 clocking) and the use of register R12 as the
// maintenance programs' bank/row/column register (its value is lost when a
// maintenance program runs) are this design's choices.
module periodic_op_scheduler
  import bender_pkg::*;
#(
  parameter int unsigned PRD_PERIOD = 167,
  parameter int unsigned ZQ_PERIOD  = 21_333_333,
  parameter int unsigned AW         = 11
) (
  input  logic                clk,
  input  logic                rst,
  input  pos_cfg_t            cfg,
  input  logic                user_start,    // pulse: host asked to run the user program
  input  logic                core_idle,
  output logic                start,
  output logic [AW-1:0]       start_pc,
  output logic                start_src,     // 1 = maintenance program
  // maintenance program memory read port
  input  logic                pm_ren,
  input  logic [AW-1:0]       pm_raddr,
  output logic [INSTR_W-1:0]  pm_rdata,
  // how many of each operation were started
  output logic [15:0]         n_prd,
  output logic [15:0]         n_zq,
  output logic [15:0]         n_ref
);
  localparam int unsigned PM_DEPTH = 48;
  localparam logic [3:0]  R = 4'd12;          // maintenance register (holds 0)
  localparam logic [AW-1:0] BASE_PRD = AW'(0);
  localparam logic [AW-1:0] BASE_ZQ  = AW'(16);
  localparam logic [AW-1:0] BASE_REF = AW'(32);

  function automatic logic [INSTR_W-1:0] pre_all();
    return enc_dram(enc_cmd(DC_PRE, 4'b0100, R, R), cmd_nop(), cmd_nop(), cmd_nop());
  endfunction

  function automatic logic [PM_DEPTH-1:0][INSTR_W-1:0] build_rom();
    logic [PM_DEPTH-1:0][INSTR_W-1:0] m;
    m = '0;   // all-zero words decode as regular NOPs
    // periodic READ
    m[0]  = enc_imm(OP_LI, 9'd0, R, 4'd0, 16'd0);
    m[1]  = pre_all();
    m[2]  = enc_imm(OP_SLEEP, 9'd0, 4'd0, 4'd0, 16'd3);    // tRP
    m[3]  = enc_dram(enc_cmd(DC_ACT, 4'b0000, R, R), cmd_nop(), cmd_nop(), cmd_nop());
    m[4]  = enc_imm(OP_SLEEP, 9'd0, 4'd0, 4'd0, 16'd3);    // tRCD
    m[5]  = enc_dram(enc_cmd(DC_READ, 4'b0000, R, R), cmd_nop(), cmd_nop(), cmd_nop());
    m[6]  = enc_imm(OP_SLEEP, 9'd0, 4'd0, 4'd0, 16'd8);    // tRAS / read to precharge
    m[7]  = pre_all();
    m[8]  = enc_imm(OP_SLEEP, 9'd0, 4'd0, 4'd0, 16'd3);    // tRP
    m[9]  = enc_imm(OP_END, 9'd0, 4'd0, 4'd0, 16'd0);
    // ZQ short calibration
    m[16] = enc_imm(OP_LI, 9'd0, R, 4'd0, 16'd0);
    m[17] = pre_all();
    m[18] = enc_imm(OP_SLEEP, 9'd0, 4'd0, 4'd0, 16'd3);
    m[19] = enc_dram(enc_cmd(DC_ZQS, 4'b0000, R, R), cmd_nop(), cmd_nop(), cmd_nop());
    m[20] = enc_imm(OP_SLEEP, 9'd0, 4'd0, 4'd0, 16'd32);   // tZQCS = 128 nCK
    m[21] = enc_imm(OP_END, 9'd0, 4'd0, 4'd0, 16'd0);
    // refresh
    m[32] = enc_imm(OP_LI, 9'd0, R, 4'd0, 16'd0);
    m[33] = pre_all();
    m[34] = enc_imm(OP_SLEEP, 9'd0, 4'd0, 4'd0, 16'd3);
    m[35] = enc_dram(enc_cmd(DC_REF, 4'b0000, R, R), cmd_nop(), cmd_nop(), cmd_nop());
    m[36] = enc_imm(OP_SLEEP, 9'd0, 4'd0, 4'd0, 16'd59);   // tRFC (350 ns, 8 Gb)
    m[37] = enc_imm(OP_END, 9'd0, 4'd0, 4'd0, 16'd0);
    return m;
  endfunction

  localparam logic [PM_DEPTH-1:0][INSTR_W-1:0] ROM = build_rom();

  // program memory read: two registered stages, like the instruction memory
  logic [INSTR_W-1:0] q1;
  always_ff @(posedge clk) begin
    if (pm_ren) begin
      q1       <= (pm_raddr < AW'(PM_DEPTH)) ? ROM[pm_raddr[5:0]] : '0;
      pm_rdata <= q1;
    end
  end

  // timers
  logic [31:0] t_prd, t_zq, t_ref;
  logic        p_prd, p_zq, p_ref, p_user;
  logic        g_prd, g_zq, g_ref, g_user;

  always_comb begin
    g_ref  = core_idle && p_ref;
    g_zq   = core_idle && !p_ref && p_zq;
    g_prd  = core_idle && !p_ref && !p_zq && p_prd;
    g_user = core_idle && !p_ref && !p_zq && !p_prd && p_user;
    start     = g_ref || g_zq || g_prd || g_user;
    start_src = !g_user;
    start_pc  = g_ref ? BASE_REF : g_zq ? BASE_ZQ : g_prd ? BASE_PRD : AW'(0);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      t_prd <= '0; t_zq <= '0; t_ref <= '0;
      p_prd <= 1'b0; p_zq <= 1'b0; p_ref <= 1'b0; p_user <= 1'b0;
      n_prd <= '0; n_zq <= '0; n_ref <= '0;
    end else begin
      // periodic READ
      if (!cfg.prd_en) t_prd <= '0;
      else if (t_prd >= 32'(PRD_PERIOD - 1)) begin t_prd <= '0; p_prd <= 1'b1; end
      else t_prd <= t_prd + 1'b1;
      // ZQS
      if (!cfg.zq_en) t_zq <= '0;
      else if (t_zq >= 32'(ZQ_PERIOD - 1)) begin t_zq <= '0; p_zq <= 1'b1; end
      else t_zq <= t_zq + 1'b1;
      // refresh
      if (!cfg.ref_en || cfg.ref_period == '0) t_ref <= '0;
      else if (t_ref >= cfg.ref_period - 1) begin t_ref <= '0; p_ref <= 1'b1; end
      else t_ref <= t_ref + 1'b1;
      if (user_start) p_user <= 1'b1;
      // grants clear their pending flag (a same-cycle expiry is kept)
      if (g_prd && !(cfg.prd_en && t_prd >= 32'(PRD_PERIOD - 1))) p_prd <= 1'b0;
      if (g_zq  && !(cfg.zq_en && t_zq >= 32'(ZQ_PERIOD - 1)))    p_zq  <= 1'b0;
      if (g_ref && !(cfg.ref_en && cfg.ref_period != '0 && t_ref >= cfg.ref_period - 1)) p_ref <= 1'b0;
      if (g_user && !user_start) p_user <= 1'b0;
      if (g_prd) n_prd <= n_prd + 1'b1;
      if (g_zq)  n_zq  <= n_zq + 1'b1;
      if (g_ref) n_ref <= n_ref + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (rst) $onehot0({g_ref, g_zq, g_prd, g_user}));
endmodule
