// bender_dram_pipe: the three DRAM stages (DRAM1..DRAM3) that execute the
// four DRAM micro-ops of a DRAM instruction in one cycle.
//
//   DRAM1  holds the micro-op coming from decode.
//   DRAM2  reads the address registers of all four slots, applies the
//          address auto-increments and writes the changed registers back
//          through the register file's bulk port.  Slots are applied in
//          order: a slot sees the register values left by the slots before
//          it, and uses the value before its own increment.  A set
//          increment flag adds the bank stride register to register A, and
//          the row stride (ACT) or column stride (READ/WRITE) register to
//          register B.
//   DRAM3  registers the result: one one-hot strobe vector per command type
//          (bit k set when slot k carries that command), per-slot bank and
//          row/column address, the auto-precharge and burst-chop flags, and
//          the wide-data register for WRITEs.  `out_valid` marks a cycle in
//          which a DRAM instruction was issued.
//
// The one-hot per-slot signals, register-held addresses and the stride
// registers follow the paper.  The in-order slot semantics, post-increment
// and the low-bit truncation of register values to bank (4 bits) and
// address (17 bits) are this design's choices.
module bender_dram_pipe
  import bender_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst,
  input  dram_uop_t                  uop_in,
  input  logic [NREG-1:0][XLEN-1:0]  rf,
  input  logic [WIDE_W-1:0]          wide,
  // register file bulk port
  output logic [NREG-1:0]            wb_mask,
  output logic [NREG-1:0][XLEN-1:0]  wb_data,
  // to the DRAM interface adapter
  output logic                       out_valid,
  output dram_cmds_t                 out_cmds,
  output logic [WIDE_W-1:0]          out_wdata,
  output logic                       busy
);
  dram_uop_t  dr2;
  dram_cmds_t c2;

  always_comb begin
    logic [NREG-1:0][XLEN-1:0] cur;
    dram_slot_t s;
    cur     = rf;
    wb_mask = '0;
    c2      = '0;
    for (int k = 0; k < NSLOT; k++) begin
      s = dr2.slot[k];
      c2.bank[k] = cur[s.ra][BANK_W-1:0];
      c2.addr[k] = cur[s.rb][DADDR_W-1:0];
      c2.ap[k]   = s.flags[FL_AP];
      c2.bc[k]   = s.flags[FL_BC];
      if (dr2.valid) begin
        unique case (s.cmd)
          DC_ACT:   c2.act[k]  = 1'b1;
          DC_PRE:   c2.pre[k]  = 1'b1;
          DC_READ:  c2.rd[k]   = 1'b1;
          DC_WRITE: c2.wr[k]   = 1'b1;
          DC_REF:   c2.refr[k] = 1'b1;
          DC_ZQS:   c2.zqs[k]  = 1'b1;
          DC_SRE:   c2.sre[k]  = 1'b1;
          DC_SRX:   c2.srx[k]  = 1'b1;
          default: ;
        endcase
        if (s.cmd inside {DC_ACT, DC_PRE, DC_READ, DC_WRITE}) begin
          if (s.flags[FL_INCA]) begin
            cur[s.ra]     = cur[s.ra] + cur[REG_BASR];
            wb_mask[s.ra] = 1'b1;
          end
          if (s.flags[FL_INCB] && s.cmd != DC_PRE) begin
            cur[s.rb]     = cur[s.rb] + ((s.cmd == DC_ACT) ? cur[REG_RASR] : cur[REG_CASR]);
            wb_mask[s.rb] = 1'b1;
          end
        end
      end
    end
    wb_data = cur;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      dr2       <= '0;
      out_valid <= 1'b0;
      out_cmds  <= '0;
      out_wdata <= '0;
    end else begin
      dr2       <= uop_in;
      out_valid <= dr2.valid;
      out_cmds  <= c2;
      if (dr2.valid && c2.wr != '0) out_wdata <= wide;
    end
  end

  assign busy = uop_in.valid || dr2.valid || out_valid;
endmodule
