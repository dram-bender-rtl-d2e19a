// bender_core: the DRAM Bender programmable core.
//
// An in-order core with five stages: fetch, decode and three execute
// stages, the latter split into an execute pipeline for regular micro-ops
// and a DRAM pipeline that issues four DRAM commands per cycle.  Register
// file and data scratchpad are inside; the instruction memory (and the
// periodic operation scheduler's program memory) sit outside and are read
// through the `if_*` port with a two-cycle latency.
//
// Operation: `start` (only when `idle`) begins fetching at `start_pc` from
// the memory selected by `start_src` (0 = instruction memory, 1 = scheduler
// program memory).  The program runs until END leaves the third execute
// stage; then `done` pulses for one cycle and `running` falls.  Each cycle
// in which a DRAM instruction reaches the third DRAM stage drives
// `dram_valid` with one-hot command strobes for the adapter.
//
// Readback accounting: `pending_reads` counts READs accepted by decode whose
// data has not yet been returned (`rd_return`).  The credit handed to decode
// for readback hints is `rb_free - pending_reads`.  `idle` requires no
// program running and no READ outstanding, so that every returned transfer
// belongs to the program that was last started (`cur_src` tells which).
//
// Performance counters for LDPC: cycles since start, non-NOP DRAM commands
// and READ commands issued since start (this design's choice; the paper
// only names the instruction).
module bender_core
  import bender_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 2048,
  parameter int unsigned SP_DEPTH   = 1024,
  parameter int unsigned RB_DEPTH   = 512,
  localparam int unsigned AW        = $clog2(IMEM_DEPTH),
  localparam int unsigned RBW       = $clog2(RB_DEPTH) + 1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  logic [AW-1:0]        start_pc,
  input  logic                 start_src,
  output logic                 running,
  output logic                 idle,
  output logic                 done,
  output logic                 cur_src,
  // instruction fetch port
  output logic                 if_ren,
  output logic [AW-1:0]        if_addr,
  output logic                 if_src,
  input  logic [INSTR_W-1:0]   if_rdata,
  // DRAM commands
  output logic                 dram_valid,
  output dram_cmds_t           dram_cmds,
  output logic [WIDE_W-1:0]    dram_wdata,
  // readback accounting
  input  logic [RBW-1:0]       rb_free,
  input  logic                 rd_return,
  output logic [15:0]          pending_reads
);
  localparam int unsigned SP_AW = $clog2(SP_DEPTH);

  // fetch <-> decode
  logic          dec_valid, dec_stall, dec_hold;
  logic [AW-1:0] dec_pc;
  logic          redirect;
  logic [AW-1:0] redirect_pc;
  logic          end_retire;
  exec_uop_t     ex_uop;
  dram_uop_t     dr_uop;
  logic [2:0]    n_reads;
  logic signed [15:0] rb_credit;
  logic          ex_busy, dr_busy;

  // register file
  logic [NREG-1:0][XLEN-1:0] rf;
  logic [WIDE_W-1:0]         wide;
  logic                      wa_en, wl_en, ww_en;
  logic [3:0]                wa_addr, wl_addr;
  logic [XLEN-1:0]           wa_data, wl_data, ww_data;
  logic [$clog2(WIDE_WORDS)-1:0] ww_idx;
  logic [NREG-1:0]           wb_mask;
  logic [NREG-1:0][XLEN-1:0] wb_data;

  // scratchpad
  logic             sp_we, sp_re;
  logic [SP_AW-1:0] sp_waddr, sp_raddr;
  logic [XLEN-1:0]  sp_wdata, sp_rdata;

  // performance counters
  logic [2:0][XLEN-1:0] perf;

  bender_fetch #(.AW(AW)) u_fetch (
    .clk, .rst, .start, .start_pc, .start_src,
    .stall(dec_stall), .hold(dec_hold), .redirect, .redirect_pc,
    .if_ren, .if_addr, .if_src, .dec_valid, .dec_pc
  );

  assign rb_credit = $signed({1'b0, 15'(rb_free)}) - $signed({1'b0, pending_reads[14:0]});

  bender_decode #(.AW(AW)) u_decode (
    .clk, .rst, .valid(dec_valid), .instr(if_rdata), .pc(dec_pc), .rb_credit,
    .stall(dec_stall), .hold(dec_hold), .ex_uop, .dr_uop, .n_reads
  );

  bender_exec_pipe #(.AW(AW), .SP_AW(SP_AW)) u_exec (
    .clk, .rst, .uop_in(ex_uop), .rf, .perf,
    .wa_en, .wa_addr, .wa_data, .wl_en, .wl_addr, .wl_data,
    .ww_en, .ww_idx, .ww_data,
    .sp_we, .sp_waddr, .sp_wdata, .sp_re, .sp_raddr, .sp_rdata,
    .redirect, .redirect_pc, .end_retire, .busy(ex_busy)
  );

  bender_dram_pipe u_dram (
    .clk, .rst, .uop_in(dr_uop), .rf, .wide, .wb_mask, .wb_data,
    .out_valid(dram_valid), .out_cmds(dram_cmds), .out_wdata(dram_wdata), .busy(dr_busy)
  );

  bender_regfile u_rf (
    .clk, .rst, .rf, .wide,
    .wa_en, .wa_addr, .wa_data, .wb_mask, .wb_data,
    .wl_en, .wl_addr, .wl_data, .ww_en, .ww_idx, .ww_data
  );

  data_scratchpad #(.DEPTH(SP_DEPTH), .WIDTH(XLEN)) u_sp (
    .clk, .we(sp_we), .waddr(sp_waddr), .wdata(sp_wdata),
    .re(sp_re), .raddr(sp_raddr), .rdata(sp_rdata)
  );

  // run state and counters
  logic [XLEN-1:0] cnt_cycles, cnt_cmds, cnt_reads;
  logic [2:0]      issued_cmds, issued_reads;

  always_comb begin
    issued_cmds  = '0;
    issued_reads = '0;
    if (dram_valid) begin
      for (int k = 0; k < NSLOT; k++) begin
        issued_cmds  = issued_cmds + 3'({dram_cmds.act[k] | dram_cmds.pre[k] | dram_cmds.rd[k] |
                                         dram_cmds.wr[k] | dram_cmds.refr[k] | dram_cmds.zqs[k] |
                                         dram_cmds.sre[k] | dram_cmds.srx[k]});
        issued_reads = issued_reads + 3'(dram_cmds.rd[k]);
      end
    end
  end

  assign perf = '{cnt_reads, cnt_cmds, cnt_cycles};

  always_ff @(posedge clk) begin
    if (rst) begin
      running       <= 1'b0;
      done          <= 1'b0;
      cur_src       <= 1'b0;
      pending_reads <= '0;
      cnt_cycles    <= '0;
      cnt_cmds      <= '0;
      cnt_reads     <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        running    <= 1'b1;
        cur_src    <= start_src;
        cnt_cycles <= '0;
        cnt_cmds   <= '0;
        cnt_reads  <= '0;
      end else begin
        cnt_cycles <= cnt_cycles + 1'b1;
        cnt_cmds   <= cnt_cmds + XLEN'(issued_cmds);
        cnt_reads  <= cnt_reads + XLEN'(issued_reads);
        if (end_retire) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
      pending_reads <= pending_reads + 16'(n_reads) - 16'(rd_return);
    end
  end

  assign idle = !running && !ex_busy && !dr_busy && (pending_reads == 16'd0);

  assert property (@(posedge clk) disable iff (rst) start |-> idle);
  assert property (@(posedge clk) disable iff (rst) !(rd_return && pending_reads == 16'd0 && n_reads == 3'd0));
endmodule
