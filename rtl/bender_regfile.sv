// bender_regfile: register file of the programmable core.
//
// Sixteen 32-bit registers: IDs 0..12 are the general-purpose registers,
// 13..15 the bank, row and column address stride registers.  Beside them
// sits the 512-bit wide-data register, written 32 bits at a time by LDWD and
// read by the DRAM pipeline for WRITE commands.
//
// Both pipelines read and write in their second stage, and at most one
// micro-op is in that stage per cycle, so two write ports serve them without
// conflict:
//   * port A: one register (execute pipeline, stage 2)
//   * bulk port: any subset of registers (DRAM pipeline, stage 2 address
//     auto-increments; several slots may update several registers at once)
// Loads write one stage later through port L.  Port L is bypassed to the
// read outputs so an instruction directly behind a load sees the loaded
// value.  If port L and port A or the bulk port write the same register in
// one cycle, the younger instruction (A / bulk) wins.
//
// All registers reset to zero.  The paper gives the register counts, the
// wide-data register and the stage in which registers are accessed; the
// port arrangement, the bypass and the reset value are this design's.
module bender_regfile
  import bender_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst,
  // read: all registers, with the load bypass applied
  output logic [NREG-1:0][XLEN-1:0]   rf,
  output logic [WIDE_W-1:0]           wide,
  // port A
  input  logic                        wa_en,
  input  logic [3:0]                  wa_addr,
  input  logic [XLEN-1:0]             wa_data,
  // bulk port
  input  logic [NREG-1:0]             wb_mask,
  input  logic [NREG-1:0][XLEN-1:0]   wb_data,
  // load port
  input  logic                        wl_en,
  input  logic [3:0]                  wl_addr,
  input  logic [XLEN-1:0]             wl_data,
  // wide-data register word write
  input  logic                        ww_en,
  input  logic [$clog2(WIDE_WORDS)-1:0] ww_idx,
  input  logic [XLEN-1:0]             ww_data
);
  logic [NREG-1:0][XLEN-1:0] regs;

  always_comb begin
    rf = regs;
    if (wl_en) rf[wl_addr] = wl_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      regs <= '0;
      wide <= '0;
    end else begin
      for (int i = 0; i < NREG; i++) begin
        if (wa_en && wa_addr == 4'(i))  regs[i] <= wa_data;
        else if (wb_mask[i])            regs[i] <= wb_data[i];
        else if (wl_en && wl_addr == 4'(i)) regs[i] <= wl_data;
      end
      if (ww_en) wide[ww_idx*XLEN +: XLEN] <= ww_data;
    end
  end

  assert property (@(posedge clk) disable iff (rst) !(wa_en && (wb_mask != '0)));
endmodule
