// dram_adapter: DRAM interface adapter between the core's DRAM pipeline and
// a DDR4 PHY with a DFI-style, four-phase command interface.
//
// The DRAM pipeline gives, per cycle, one-hot command strobes for four
// slots.  The adapter turns slot k into the DDR4 command pins of DFI phase k
// (the PHY serialises the four phases onto the DRAM bus at four times the
// fabric clock), following the DDR4 command truth table:
//
//   command   ACT_n RAS_n CAS_n WE_n  address pins
//   ACT         0   A16   A15   A14   A13..A0 = row[13:0]
//   REF/SRE     1    0     0     1    (SRE: CKE low from this phase on)
//   PRE         1    0     1     0    A10 = all banks
//   WRITE       1    1     0     0    A9..A0 = column, A10 = AP, A12 = BC_n
//   READ        1    1     0     1    same as WRITE
//   ZQS         1    1     1     0    A10 = 0 (short calibration)
//   idle      CS_n = 1 (deselect); SRX: CKE high from this phase on
//
// WRITEs carry the wide-data register with them (`dfi_wrdata`, marked by
// `dfi_wrdata_en`); the PHY applies the write latency.  Read data returned
// by the PHY is registered and passed on unchanged.  All outputs are
// registered: a command appears on the DFI port one cycle after the DRAM
// pipeline drives it.  Issuing commands without ordering or timing checks
// is the point of the design: the adapter checks nothing.
//
// That the adapter translates one-hot per-slot strobes into PHY signals,
// and is the only part to change for a new DRAM standard, is the paper's.
// The DFI-style port, the phase mapping and the pin encoding (the DDR4
// standard's) are this implementation's.
module dram_adapter
  import bender_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst,
  // from the DRAM pipeline
  input  logic                       cmd_valid,
  input  dram_cmds_t                 cmds,
  input  logic [WIDE_W-1:0]          wdata,
  // DFI-style command port, one entry per phase
  output logic [NSLOT-1:0]           dfi_cs_n,
  output logic [NSLOT-1:0]           dfi_act_n,
  output logic [NSLOT-1:0]           dfi_ras_n,
  output logic [NSLOT-1:0]           dfi_cas_n,
  output logic [NSLOT-1:0]           dfi_we_n,
  output logic [NSLOT-1:0][1:0]      dfi_bg,
  output logic [NSLOT-1:0][1:0]      dfi_ba,
  output logic [NSLOT-1:0][13:0]     dfi_addr,
  output logic [NSLOT-1:0]           dfi_cke,
  output logic [NSLOT-1:0]           dfi_wrdata_en,
  output logic [WIDE_W-1:0]          dfi_wrdata,
  // read data from the PHY and towards the readback FIFO
  input  logic                       phy_rd_valid,
  input  logic [WIDE_W-1:0]          phy_rd_data,
  output logic                       rd_valid,
  output logic [WIDE_W-1:0]          rd_data
);
  logic                        cke_q;
  logic [NSLOT-1:0]            cs_n, act_n, ras_n, cas_n, we_n, cke, wen;
  logic [NSLOT-1:0][1:0]       bg, ba;
  logic [NSLOT-1:0][13:0]      addr;
  logic                        cke_next;

  always_comb begin
    logic c;
    c = cke_q;
    for (int k = 0; k < NSLOT; k++) begin
      cs_n[k]  = 1'b1;
      act_n[k] = 1'b1;
      ras_n[k] = 1'b1;
      cas_n[k] = 1'b1;
      we_n[k]  = 1'b1;
      bg[k]    = cmds.bank[k][3:2];
      ba[k]    = cmds.bank[k][1:0];
      addr[k]  = '0;
      wen[k]   = 1'b0;
      if (cmd_valid) begin
        if (cmds.act[k]) begin
          cs_n[k] = 1'b0; act_n[k] = 1'b0;
          {ras_n[k], cas_n[k], we_n[k]} = cmds.addr[k][16:14];
          addr[k] = cmds.addr[k][13:0];
        end else if (cmds.refr[k] || cmds.sre[k]) begin
          cs_n[k] = 1'b0; {ras_n[k], cas_n[k], we_n[k]} = 3'b001;
        end else if (cmds.pre[k]) begin
          cs_n[k] = 1'b0; {ras_n[k], cas_n[k], we_n[k]} = 3'b010;
          addr[k][10] = cmds.ap[k];
        end else if (cmds.wr[k] || cmds.rd[k]) begin
          cs_n[k] = 1'b0; {ras_n[k], cas_n[k], we_n[k]} = cmds.wr[k] ? 3'b100 : 3'b101;
          addr[k][9:0] = cmds.addr[k][9:0];
          addr[k][10]  = cmds.ap[k];
          addr[k][12]  = !cmds.bc[k];
          wen[k]       = cmds.wr[k];
        end else if (cmds.zqs[k]) begin
          cs_n[k] = 1'b0; {ras_n[k], cas_n[k], we_n[k]} = 3'b110;
        end
        if (cmds.sre[k]) c = 1'b0;
        if (cmds.srx[k]) c = 1'b1;
      end
      cke[k] = c;
    end
    cke_next = c;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cke_q         <= 1'b1;
      dfi_cs_n      <= '1;
      dfi_act_n     <= '1;
      dfi_ras_n     <= '1;
      dfi_cas_n     <= '1;
      dfi_we_n      <= '1;
      dfi_bg        <= '0;
      dfi_ba        <= '0;
      dfi_addr      <= '0;
      dfi_cke       <= '1;
      dfi_wrdata_en <= '0;
      dfi_wrdata    <= '0;
      rd_valid      <= 1'b0;
      rd_data       <= '0;
    end else begin
      cke_q         <= cke_next;
      dfi_cs_n      <= cs_n;
      dfi_act_n     <= act_n;
      dfi_ras_n     <= ras_n;
      dfi_cas_n     <= cas_n;
      dfi_we_n      <= we_n;
      dfi_bg        <= bg;
      dfi_ba        <= ba;
      dfi_addr      <= addr;
      dfi_cke       <= cke;
      dfi_wrdata_en <= wen;
      if (wen != '0) dfi_wrdata <= wdata;
      rd_valid      <= phy_rd_valid;
      if (phy_rd_valid) rd_data <= phy_rd_data;
    end
  end
endmodule
