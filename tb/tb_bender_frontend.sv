// tb_bender_frontend: host-side packets into the frontend and readback
// entries out of it.  Checks:
//   - LOAD (header type 1, count N in [31:16], start address in [47:32])
//     writes the following N beats' low 72 bits to consecutive instruction
//     memory addresses, in order, with gaps between beats allowed;
//   - START (type 2) and CLROVF (type 4) give one-cycle pulses;
//   - CONFIG (type 3) sets the scheduler enables ([4] refresh, [5] ZQS,
//     [6] periodic READ) and the refresh period ([63:32]); reset values are
//     refresh off, ZQS and periodic READ on;
//   - each 512-bit readback entry leaves as two 256-bit beats, low half
//     first, tlast on the second, under a random tready, and is popped from
//     the FIFO exactly when its last beat is accepted.
module tb_bender_frontend;
  import bender_pkg::*;
  localparam int unsigned AW = 11;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic s_axis_tvalid, s_axis_tready, s_axis_tlast, m_axis_tvalid, m_axis_tready, m_axis_tlast;
  logic [255:0] s_axis_tdata, m_axis_tdata;
  logic im_we, user_start, clr_overflow, rb_empty, rb_pop;
  logic [AW-1:0] im_waddr;
  logic [INSTR_W-1:0] im_wdata;
  pos_cfg_t cfg;
  logic [WIDE_W-1:0] rb_data;

  bender_frontend #(.AXIS_W(256), .AW(AW)) dut (.*);

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

  // instruction memory and pulse monitors
  logic [INSTR_W-1:0] imem [1 << AW];
  int n_we = 0, n_start = 0, n_clr = 0;
  always @(posedge clk) if (!rst) begin
    if (im_we) begin imem[im_waddr] = im_wdata; n_we++; end
    if (user_start) n_start++;
    if (clr_overflow) n_clr++;
  end

  // readback FIFO model
  logic [WIDE_W-1:0] fifo [$], sent [$], rx [$];
  logic [255:0] lo;
  int n_beat = 0;
  assign rb_empty = fifo.size() == 0;
  assign rb_data  = rb_empty ? '0 : fifo[0];
  always @(posedge clk) if (!rst) begin
    if (m_axis_tvalid && m_axis_tready) begin
      n_beat++;
      check(m_axis_tlast == (n_beat % 2 == 0), "tlast on the second beat");
      if (!m_axis_tlast) lo = m_axis_tdata; else rx.push_back({m_axis_tdata, lo});
    end
    check(rb_pop == (m_axis_tvalid && m_axis_tready && m_axis_tlast), "pop on last beat");
    if (rb_pop) void'(fifo.pop_front());
  end

  task automatic beat(input logic [255:0] d);
    s_axis_tdata <= d; s_axis_tvalid <= 1'b1; s_axis_tlast <= 1'b1;
    @(posedge clk);
    if ($urandom_range(2) == 0) begin s_axis_tvalid <= 1'b0; repeat ($urandom_range(1, 3)) @(posedge clk); end
  endtask

  function automatic logic [WIDE_W-1:0] rnd512();
    logic [WIDE_W-1:0] d;
    for (int i = 0; i < 16; i++) d[32*i +: 32] = $urandom;
    return d;
  endfunction

  initial begin
    logic [INSTR_W-1:0] prog [40];
    s_axis_tvalid = 0; s_axis_tdata = '0; s_axis_tlast = 0; m_axis_tready = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk); #1;
    check(!cfg.ref_en && cfg.zq_en && cfg.prd_en, "configuration after reset");
    check(s_axis_tready, "always ready");
    // LOAD 40 instructions at address 100
    for (int i = 0; i < 40; i++) prog[i] = {8'($urandom), $urandom, $urandom};
    beat({208'd0, 16'd100, 16'd40, 12'd0, 4'd1});
    for (int i = 0; i < 40; i++) beat({184'($urandom), prog[i]});
    s_axis_tvalid <= 1'b0;
    repeat (3) @(posedge clk);
    check(n_we == 40, $sformatf("%0d instruction writes", n_we));
    for (int i = 0; i < 40; i++) check(imem[100 + i] == prog[i], $sformatf("instruction %0d", i));
    // START, CONFIG, CLROVF
    beat({252'd0, 4'd2}); s_axis_tvalid <= 1'b0; repeat (3) @(posedge clk);
    check(n_start == 1, "one START pulse");
    beat({192'd0, 32'd12345, 25'd0, 3'b001, 4'd3}); s_axis_tvalid <= 1'b0; repeat (3) @(posedge clk);
    check(cfg.ref_en && !cfg.zq_en && !cfg.prd_en && cfg.ref_period == 32'd12345, "CONFIG");
    beat({252'd0, 4'd4}); s_axis_tvalid <= 1'b0; repeat (3) @(posedge clk);
    check(n_clr == 1 && n_start == 1, "one CLROVF pulse");
    // readback
    for (int i = 0; i < 30; i++) begin automatic logic [WIDE_W-1:0] d = rnd512(); fifo.push_back(d); sent.push_back(d); end
    for (int c = 0; c < 600 && rx.size() < 30; c++) begin
      @(negedge clk); m_axis_tready = $urandom_range(1);
    end
    @(negedge clk); m_axis_tready = 0;
    check(rx.size() == 30, $sformatf("%0d entries received", rx.size()));
    for (int i = 0; i < 30 && i < rx.size(); i++) check(rx[i] == sent[i], $sformatf("entry %0d", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
