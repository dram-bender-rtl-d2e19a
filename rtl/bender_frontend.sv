// bender_frontend: connects the host link to the DRAM Bender hardware.
//
// Host to FPGA, an AXI4-Stream of AXIS_W-bit beats (the PCIe DMA engine's
// streaming side).  Each packet begins with a header beat whose bits [3:0]
// select the command:
//   1  LOAD    [31:16] = N, [47:32] = first address; the next N beats carry
//              one instruction each in bits [71:0], written to consecutive
//              instruction memory addresses, one per cycle.
//   2  START   ask the periodic operation scheduler to start the user
//              program at address 0 as soon as the core is idle.
//   3  CONFIG  [4] refresh enable, [5] ZQS enable, [6] periodic READ
//              enable, [63:32] refresh period in fabric cycles.
//   4  CLROVF  clear the readback FIFO's overflow flag.
// The receive side is always ready.
//
// FPGA to host, an AXI4-Stream carrying the readback FIFO: each 512-bit
// transfer read from DRAM leaves as WIDE_W/AXIS_W beats, least significant
// part first, the last beat marked with tlast; the FIFO entry is popped when
// that beat is accepted.
//
// The paper gives the frontend's job (program loading over the host link,
// readback to the host) and the 256-bit stream width of the DDR4 boards
// (the DDR3 board's 128-bit bus is called half as wide).  The packet format
// is this design's own.
module bender_frontend
  import bender_pkg::*;
#(
  parameter int unsigned AXIS_W = 256,
  parameter int unsigned AW     = 11
) (
  input  logic                 clk,
  input  logic                 rst,
  // host -> FPGA
  input  logic                 s_axis_tvalid,
  output logic                 s_axis_tready,
  input  logic [AXIS_W-1:0]    s_axis_tdata,
  input  logic                 s_axis_tlast,
  // FPGA -> host
  output logic                 m_axis_tvalid,
  input  logic                 m_axis_tready,
  output logic [AXIS_W-1:0]    m_axis_tdata,
  output logic                 m_axis_tlast,
  // instruction memory write port
  output logic                 im_we,
  output logic [AW-1:0]        im_waddr,
  output logic [INSTR_W-1:0]   im_wdata,
  // control
  output logic                 user_start,
  output pos_cfg_t             cfg,
  output logic                 clr_overflow,
  // readback FIFO
  input  logic                 rb_empty,
  input  logic [WIDE_W-1:0]    rb_data,
  output logic                 rb_pop
);
  localparam int unsigned NBEAT = WIDE_W / AXIS_W;
  localparam int unsigned BW    = (NBEAT > 1) ? $clog2(NBEAT) : 1;

  typedef enum logic [0:0] {S_HDR, S_LOAD} state_e;
  state_e      state;
  logic [15:0] remaining;
  logic [BW-1:0] beat;

  assign s_axis_tready = 1'b1;

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= S_HDR;
      remaining    <= '0;
      im_we        <= 1'b0;
      im_waddr     <= '0;
      im_wdata     <= '0;
      user_start   <= 1'b0;
      clr_overflow <= 1'b0;
      cfg          <= '{ref_en: 1'b0, zq_en: 1'b1, prd_en: 1'b1, ref_period: 32'd0};
    end else begin
      user_start   <= 1'b0;
      clr_overflow <= 1'b0;
      if (im_we) im_waddr <= im_waddr + 1'b1;
      im_we <= 1'b0;
      if (s_axis_tvalid) begin
        unique case (state)
          S_HDR: begin
            unique case (s_axis_tdata[3:0])
              4'd1: begin
                remaining <= s_axis_tdata[31:16];
                im_waddr  <= s_axis_tdata[32 +: AW];
                if (s_axis_tdata[31:16] != 16'd0) state <= S_LOAD;
              end
              4'd2: user_start <= 1'b1;
              4'd3: begin
                cfg.ref_en     <= s_axis_tdata[4];
                cfg.zq_en      <= s_axis_tdata[5];
                cfg.prd_en     <= s_axis_tdata[6];
                cfg.ref_period <= s_axis_tdata[63:32];
              end
              4'd4: clr_overflow <= 1'b1;
              default: ;
            endcase
          end
          S_LOAD: begin
            im_we     <= 1'b1;
            im_wdata  <= s_axis_tdata[INSTR_W-1:0];
            remaining <= remaining - 16'd1;
            if (remaining == 16'd1) state <= S_HDR;
          end
          default: state <= S_HDR;
        endcase
      end
    end
  end

  // readback stream
  assign m_axis_tvalid = !rb_empty;
  assign m_axis_tdata  = rb_data[beat*AXIS_W +: AXIS_W];
  assign m_axis_tlast  = (beat == BW'(NBEAT - 1));
  assign rb_pop        = m_axis_tvalid && m_axis_tready && m_axis_tlast;

  always_ff @(posedge clk) begin
    if (rst) beat <= '0;
    else if (m_axis_tvalid && m_axis_tready) beat <= m_axis_tlast ? '0 : beat + 1'b1;
  end
endmodule
