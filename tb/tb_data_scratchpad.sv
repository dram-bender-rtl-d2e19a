// tb_data_scratchpad: checks the 32-bit data scratchpad against a reference
// array with random writes and reads.  Reads are registered: the word for
// the address presented at an edge with re high is on rdata after that
// edge, and rdata holds while re is low.
module tb_data_scratchpad;
  localparam int unsigned DEPTH = 1024, WIDTH = 32, AW = $clog2(DEPTH);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];

  data_scratchpad #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

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

  initial begin
    logic [WIDTH-1:0] held;
    for (int a = 0; a < DEPTH; a++) begin
      ref_mem[a] = $urandom;
      @(negedge clk); we = 1; waddr = AW'(a); wdata = ref_mem[a];
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 2000; n++) begin
      int unsigned a = $urandom_range(DEPTH - 1);
      @(negedge clk);
      if ($urandom_range(1)) begin
        we = 1; waddr = AW'(a); wdata = $urandom; ref_mem[a] = wdata; re = 0;
      end else begin
        we = 0; re = 1; raddr = AW'(a);
        @(posedge clk); #1;
        check(rdata == ref_mem[a], $sformatf("read %0d", a));
        re = 0;
      end
    end
    @(negedge clk); we = 0; held = rdata; re = 0; raddr = 0;
    repeat (3) begin @(posedge clk); #1; check(rdata == held, "hold while re low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
