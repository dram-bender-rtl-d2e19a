// tb_dram_adapter: drives random four-slot command groups into the DRAM
// interface adapter and compares the four DFI phases, one cycle later, with
// the DDR4 command truth table written out here independently:
//   ACT   ACT_n=0, RAS/CAS/WE = row[16:14], A[13:0] = row[13:0]
//   PRE   RAS=0 CAS=1 WE=0, A10 = all banks
//   READ  RAS=1 CAS=0 WE=1, A[9:0] = column, A10 = auto-precharge, A12 = !burst chop
//   WRITE RAS=1 CAS=0 WE=0, same address bits, write-data enable on the phase
//   REF   RAS=0 CAS=0 WE=1 (with CKE high)
//   ZQCS  RAS=1 CAS=1 WE=0, A10 = 0
//   SRE   the REF encoding with CKE falling on that phase; SRX: CKE rising
// Unused phases must be deselected (CS_n high).  The read-data path is
// checked to be a one-cycle registered copy.
module tb_dram_adapter;
  import bender_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic cmd_valid;
  dram_cmds_t cmds;
  logic [WIDE_W-1:0] wdata, dfi_wrdata, phy_rd_data, rd_data;
  logic [NSLOT-1:0] dfi_cs_n, dfi_act_n, dfi_ras_n, dfi_cas_n, dfi_we_n, dfi_cke, dfi_wrdata_en;
  logic [NSLOT-1:0][1:0] dfi_bg, dfi_ba;
  logic [NSLOT-1:0][13:0] dfi_addr;
  logic phy_rd_valid, rd_valid;

  dram_adapter dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WIDE_W-1:0] rnd512();
    logic [WIDE_W-1:0] d;
    for (int i = 0; i < 16; i++) d[32*i +: 32] = $urandom;
    return d;
  endfunction

  int n_kind [8];
  initial begin
    bit cke_model = 1;
    cmd_valid = 0; cmds = '0; wdata = '0; phy_rd_valid = 0; phy_rd_data = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 3000; n++) begin
      int kind [NSLOT];
      bit any_wr;
      logic [WIDE_W-1:0] wd, rdd;
      bit rv;
      @(negedge clk);
      cmds = '0;
      cmd_valid = $urandom_range(7) != 0;
      any_wr = 0;
      wd = rnd512(); wdata = wd;
      for (int k = 0; k < NSLOT; k++) begin
        // 0 none, 1 ACT, 2 PRE, 3 READ, 4 WRITE, 5 REF, 6 ZQS, 7 SRE/SRX
        kind[k] = $urandom_range(7);
        if (kind[k] == 7 && $urandom_range(3) != 0) kind[k] = 0;
        cmds.bank[k] = 4'($urandom);
        cmds.addr[k] = 17'($urandom);
        cmds.ap[k] = 1'($urandom); cmds.bc[k] = 1'($urandom);
        case (kind[k])
          1: cmds.act[k] = 1;  2: cmds.pre[k] = 1;  3: cmds.rd[k] = 1;  4: cmds.wr[k] = 1;
          5: cmds.refr[k] = 1; 6: cmds.zqs[k] = 1;
          7: if (cke_model) cmds.sre[k] = 1; else cmds.srx[k] = 1;
          default: ;
        endcase
      end
      rv = $urandom_range(1); rdd = rnd512();
      phy_rd_valid = rv; phy_rd_data = rdd;
      @(posedge clk); #1;
      check(rd_valid == rv && (!rv || rd_data == rdd), "read data path");
      for (int k = 0; k < NSLOT; k++) begin
        logic [2:0] rcw;
        int kk;
        kk = cmd_valid ? kind[k] : 0;
        if (kk == 7 && cmds.srx[k]) kk = 8;
        n_kind[kk % 8]++;
        rcw = {dfi_ras_n[k], dfi_cas_n[k], dfi_we_n[k]};
        check({dfi_bg[k], dfi_ba[k]} == cmds.bank[k], "bank group / bank");
        case (kk)
          0, 8: check(dfi_cs_n[k], $sformatf("phase %0d deselected", k));
          1: check(!dfi_cs_n[k] && !dfi_act_n[k] && rcw == cmds.addr[k][16:14] && dfi_addr[k] == cmds.addr[k][13:0], "ACT");
          2: check(!dfi_cs_n[k] && dfi_act_n[k] && rcw == 3'b010 && dfi_addr[k][10] == cmds.ap[k], "PRE");
          3: check(!dfi_cs_n[k] && dfi_act_n[k] && rcw == 3'b101 && dfi_addr[k][9:0] == cmds.addr[k][9:0] &&
                   dfi_addr[k][10] == cmds.ap[k] && dfi_addr[k][12] == !cmds.bc[k] && !dfi_wrdata_en[k], "READ");
          4: begin
               check(!dfi_cs_n[k] && dfi_act_n[k] && rcw == 3'b100 && dfi_addr[k][9:0] == cmds.addr[k][9:0] &&
                     dfi_addr[k][10] == cmds.ap[k] && dfi_addr[k][12] == !cmds.bc[k] && dfi_wrdata_en[k], "WRITE");
               any_wr = 1;
             end
          5: check(!dfi_cs_n[k] && dfi_act_n[k] && rcw == 3'b001, "REF");
          6: check(!dfi_cs_n[k] && dfi_act_n[k] && rcw == 3'b110 && !dfi_addr[k][10], "ZQS");
          7: check(!dfi_cs_n[k] && rcw == 3'b001, "SRE encoding");
          default: ;
        endcase
        if (kk == 7) cke_model = 0;
        if (kk == 8) cke_model = 1;
        check(dfi_cke[k] == cke_model, $sformatf("CKE phase %0d", k));
      end
      if (any_wr) check(dfi_wrdata == wd, "write data");
    end
    for (int i = 0; i < 8; i++) check(n_kind[i] > 0, $sformatf("command kind %0d exercised", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
