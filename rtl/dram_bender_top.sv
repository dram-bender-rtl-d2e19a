// dram_bender_top: the DRAM Bender hardware, between a host link (AXI4-
// Stream from a PCIe DMA engine) and a DDR4 PHY (DFI-style, four command
// phases per fabric cycle).
//
//   host stream -> frontend -> instruction memory --+
//                     |                              +-> fetch (core)
//                     +--> periodic operation scheduler (start arbitration,
//                          maintenance program memory) -+
//   programmable core: fetch, decode, EXE1-3 / DRAM1-3, register file,
//                      data scratchpad
//   DRAM pipeline -> DRAM interface adapter -> DFI command/write-data ports
//   PHY read data -> adapter -> readback FIFO -> frontend -> host stream
//
// The host loads a program (LOAD packets), optionally configures refresh
// (CONFIG), and requests a run (START).  The scheduler starts the program
// when the core is idle and no maintenance program is due.  The core issues
// DRAM commands exactly when the program says, four per cycle; READ data
// flows through the readback FIFO to the host.  Data returned for the
// scheduler's own periodic READs is dropped.
//
// The PHY, the DRAM module and the PCIe engine are outside this module;
// their signals are its ports.  Block structure and connections follow the
// paper's block diagram; the ports' formats are this design's.
module dram_bender_top
  import bender_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 2048,
  parameter int unsigned SP_DEPTH   = 1024,
  parameter int unsigned RB_DEPTH   = 512,
  parameter int unsigned AXIS_W     = 256,
  parameter int unsigned PRD_PERIOD = 167,
  parameter int unsigned ZQ_PERIOD  = 21_333_333,
  localparam int unsigned AW        = $clog2(IMEM_DEPTH),
  localparam int unsigned RBW       = $clog2(RB_DEPTH) + 1
) (
  input  logic                   clk,
  input  logic                   rst,
  // host link (AXI4-Stream)
  input  logic                   s_axis_tvalid,
  output logic                   s_axis_tready,
  input  logic [AXIS_W-1:0]      s_axis_tdata,
  input  logic                   s_axis_tlast,
  output logic                   m_axis_tvalid,
  input  logic                   m_axis_tready,
  output logic [AXIS_W-1:0]      m_axis_tdata,
  output logic                   m_axis_tlast,
  // DDR4 PHY (DFI-style)
  output logic [NSLOT-1:0]       dfi_cs_n,
  output logic [NSLOT-1:0]       dfi_act_n,
  output logic [NSLOT-1:0]       dfi_ras_n,
  output logic [NSLOT-1:0]       dfi_cas_n,
  output logic [NSLOT-1:0]       dfi_we_n,
  output logic [NSLOT-1:0][1:0]  dfi_bg,
  output logic [NSLOT-1:0][1:0]  dfi_ba,
  output logic [NSLOT-1:0][13:0] dfi_addr,
  output logic [NSLOT-1:0]       dfi_cke,
  output logic [NSLOT-1:0]       dfi_wrdata_en,
  output logic [WIDE_W-1:0]      dfi_wrdata,
  input  logic                   phy_rd_valid,
  input  logic [WIDE_W-1:0]      phy_rd_data,
  // status
  output logic                   core_running,
  output logic                   program_done,   // pulse when any program ends
  output logic                   rb_overflow,
  output logic [15:0]            n_prd,
  output logic [15:0]            n_zq,
  output logic [15:0]            n_ref
);
  // frontend
  logic                 im_we;
  logic [AW-1:0]        im_waddr;
  logic [INSTR_W-1:0]   im_wdata;
  logic                 user_start, clr_overflow;
  pos_cfg_t             cfg;
  // core
  logic                 start, start_src, core_idle, cur_src;
  logic [AW-1:0]        start_pc;
  logic                 if_ren, if_src;
  logic [AW-1:0]        if_addr;
  logic [INSTR_W-1:0]   im_rdata, pm_rdata, if_rdata;
  logic                 dram_valid;
  dram_cmds_t           dram_cmds;
  logic [WIDE_W-1:0]    dram_wdata;
  logic [15:0]          pending_reads;
  // readback
  logic                 rd_valid;
  logic [WIDE_W-1:0]    rd_data;
  logic                 rb_empty, rb_full, rb_pop;
  logic [WIDE_W-1:0]    rb_data;
  logic [RBW-1:0]       rb_count, rb_free;

  bender_frontend #(.AXIS_W(AXIS_W), .AW(AW)) u_frontend (
    .clk, .rst,
    .s_axis_tvalid, .s_axis_tready, .s_axis_tdata, .s_axis_tlast,
    .m_axis_tvalid, .m_axis_tready, .m_axis_tdata, .m_axis_tlast,
    .im_we, .im_waddr, .im_wdata, .user_start, .cfg, .clr_overflow,
    .rb_empty, .rb_data, .rb_pop
  );

  instr_mem #(.DEPTH(IMEM_DEPTH), .WIDTH(INSTR_W)) u_imem (
    .clk, .we(im_we), .waddr(im_waddr), .wdata(im_wdata),
    .ren(if_ren), .raddr(if_addr), .rdata(im_rdata)
  );

  periodic_op_scheduler #(.PRD_PERIOD(PRD_PERIOD), .ZQ_PERIOD(ZQ_PERIOD), .AW(AW)) u_pos (
    .clk, .rst, .cfg, .user_start, .core_idle,
    .start, .start_pc, .start_src,
    .pm_ren(if_ren), .pm_raddr(if_addr), .pm_rdata,
    .n_prd, .n_zq, .n_ref
  );

  assign if_rdata = if_src ? pm_rdata : im_rdata;

  bender_core #(.IMEM_DEPTH(IMEM_DEPTH), .SP_DEPTH(SP_DEPTH), .RB_DEPTH(RB_DEPTH)) u_core (
    .clk, .rst, .start, .start_pc, .start_src,
    .running(core_running), .idle(core_idle), .done(program_done), .cur_src,
    .if_ren, .if_addr, .if_src, .if_rdata,
    .dram_valid, .dram_cmds, .dram_wdata,
    .rb_free, .rd_return(rd_valid), .pending_reads
  );

  dram_adapter u_adapter (
    .clk, .rst, .cmd_valid(dram_valid), .cmds(dram_cmds), .wdata(dram_wdata),
    .dfi_cs_n, .dfi_act_n, .dfi_ras_n, .dfi_cas_n, .dfi_we_n,
    .dfi_bg, .dfi_ba, .dfi_addr, .dfi_cke, .dfi_wrdata_en, .dfi_wrdata,
    .phy_rd_valid, .phy_rd_data, .rd_valid, .rd_data
  );

  readback_fifo #(.DEPTH(RB_DEPTH), .WIDTH(WIDE_W)) u_rb (
    .clk, .rst, .clr_overflow,
    .push(rd_valid && !cur_src), .wr_data(rd_data),
    .pop(rb_pop), .rd_data(rb_data), .empty(rb_empty), .full(rb_full),
    .count(rb_count), .free(rb_free), .overflow(rb_overflow)
  );
endmodule
