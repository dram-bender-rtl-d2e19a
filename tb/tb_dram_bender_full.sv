// tb_dram_bender_full: one complete operation of the DRAM Bender hardware
// with every parameter at its default (2048-instruction program memory,
// 1024-word scratchpad, 512-entry readback FIFO, 256-bit host stream,
// periodic READ every 167 cycles, ZQS every 128 ms).
//
// The host loads a program that fills the 512-bit wide-data register with
// a pattern, opens row 300 of bank 5, writes four columns, reads them back
// with readback hints, closes the bank and ends.  The testbench checks the
// four readback transfers, that the DRAM saw the right number of commands,
// that a periodic READ ran while the core was otherwise idle and that its
// data did not reach the host.  The DDR4 side is the behavioural PHY model.
module tb_dram_bender_full;
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

  logic [511:0] rx_q [$];
  logic [255:0] lo_half;
  always @(posedge clk)
    if (!rst && m_tvalid && m_tready) begin
      if (!m_tlast) lo_half = m_tdata;
      else rx_q.push_back({m_tdata, lo_half});
    end

  task automatic beat(input logic [255:0] d);
    s_tdata <= d; s_tvalid <= 1'b1; s_tlast <= 1'b1;
    @(posedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [511:0] pattern(input int k);
    logic [511:0] d;
    for (int i = 0; i < 16; i++) d[32*i +: 32] = 32'hA500_0000 + 32'(i);
    d[31:0] = 32'hC000_0000 + 32'(k);
    return d;
  endfunction

  initial begin
    logic [71:0] p [$];
    int unsigned n;
    s_tvalid = 0; s_tdata = '0; s_tlast = 0; m_tready = 1;
    repeat (5) @(posedge clk);
    rst <= 1'b0;
    repeat (5) @(posedge clk);

    p.push_back(i_li(4'd5, 16'd5));
    p.push_back(i_li(4'd4, 16'd300));
    p.push_back(i_li(4'd3, 16'd0));
    p.push_back(i_li(REG_CASR, 16'd8));
    p.push_back(i_li(4'd6, 16'd32));
    p.push_back(i_li(4'd1, 16'hA500));
    p.push_back(i_alu(FN_ADD, 4'd1, 4'd1, 4'd1));   // shift left 16 by doubling
    for (int i = 0; i < 15; i++) p.push_back(i_alu(FN_ADD, 4'd1, 4'd1, 4'd1));
    for (int i = 0; i < 16; i++) begin
      p.push_back(i_ldwd(4'd1, 16'(i)));
      p.push_back(i_addi(4'd1, 4'd1, 16'd1));
    end
    p.push_back(i_li(4'd2, 16'hC000));
    for (int i = 0; i < 16; i++) p.push_back(i_alu(FN_ADD, 4'd2, 4'd2, 4'd2));
    p.push_back(i_ldwd(4'd2, 16'd0));
    p.push_back(i_dram1(DC_ACT, 4'b0000, 4'd5, 4'd4));
    p.push_back(i_sleep(16'd3));
    // loop: WRITE, R2++, wide[0] = R2, branch while column < 32
    p.push_back(i_dram1(DC_WRITE, 4'b0010, 4'd5, 4'd3));
    p.push_back(i_addi(4'd2, 4'd2, 16'd1));
    p.push_back(i_ldwd(4'd2, 16'd0));
    p.push_back(i_bl(4'd3, 4'd6, 12'(p.size() - 3)));
    p.push_back(i_li(4'd3, 16'd0));
    p.push_back(i_rbhint(16'd1));
    p.push_back(i_dram1(DC_READ, 4'b0010, 4'd5, 4'd3));
    p.push_back(i_bl(4'd3, 4'd6, 12'(p.size() - 2)));
    p.push_back(i_sleep(16'd10));
    p.push_back(i_dram1(DC_PRE, 4'b0000, 4'd5, 4'd5));
    p.push_back(i_op(OP_END));

    beat({208'd0, 16'd0, 16'(p.size()), 12'd0, 4'd1});
    for (int i = 0; i < p.size(); i++) beat(256'(p[i]));
    beat({252'd0, 4'd2});
    s_tvalid <= 1'b0;

    n = 0;
    while (!(done && !dut.cur_src) && n < 10000) begin @(posedge clk); n++; end
    check(n < 10000, "program finished");
    repeat (400) @(posedge clk);

    check(rx_q.size() == 4, $sformatf("readback transfers %0d", rx_q.size()));
    for (int k = 0; k < 4 && k < rx_q.size(); k++)
      check(rx_q[k] == pattern(k), $sformatf("column %0d data", 8 * k));
    check(phy.n_wr == 4, $sformatf("writes %0d", phy.n_wr));
    check(n_prd >= 1, "periodic READ ran between operations");
    check(phy.n_rd == 4 + 32'(n_prd), $sformatf("reads %0d = 4 user + %0d periodic", phy.n_rd, n_prd));
    check(!ovf, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
