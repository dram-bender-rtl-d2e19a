// tb_instr_mem: checks the instruction memory against a reference array.
// Random instructions are written to every address, then every address is
// read back.  The read has two cycles of latency: an address sampled at
// edge t (with ren high) gives its word on rdata after edge t+1; with ren
// low both read registers hold.  The test checks the data,
// the two-cycle latency, the hold behaviour and that a write and a read of
// the same address in one cycle return the old word.
module tb_instr_mem;
  localparam int unsigned DEPTH = 64, WIDTH = 72, AW = $clog2(DEPTH);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 0, ren = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];

  instr_mem #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.clk, .we, .waddr, .wdata, .ren, .raddr, .rdata);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WIDTH-1:0] rnd72();
    return {8'($urandom), $urandom, $urandom};
  endfunction

  initial begin
    // fill every address
    for (int a = 0; a < DEPTH; a++) begin
      ref_mem[a] = rnd72();
      @(negedge clk); we = 1; waddr = AW'(a); wdata = ref_mem[a];
    end
    @(negedge clk); we = 0;
    // read each address: the word is on rdata after the second edge
    ren = 1;
    for (int a = 0; a < DEPTH + 1; a++) begin
      raddr = AW'(a % DEPTH);
      @(posedge clk); #1;
      if (a >= 1) check(rdata == ref_mem[a - 1], $sformatf("read addr %0d", a - 1));
    end
    // hold: with ren low the output keeps its word
    raddr = 5; @(posedge clk); #1; raddr = 6; @(posedge clk); #1;
    check(rdata == ref_mem[5], "two-cycle latency");
    ren = 0; raddr = 9;
    repeat (3) begin @(posedge clk); #1; check(rdata == ref_mem[5], "hold while ren low"); end
    ren = 1; @(posedge clk); #1; check(rdata == ref_mem[6], "pipeline resumes with held word");
    // same-address write and read: old word comes out
    raddr = 3; we = 1; waddr = 3; wdata = ~ref_mem[3];
    @(posedge clk); #1; we = 0; @(posedge clk); #1;
    check(rdata == ref_mem[3], "read-during-write returns old word");
    ref_mem[3] = ~ref_mem[3];
    @(posedge clk); #1; @(posedge clk); #1;
    check(rdata == ref_mem[3], "new word after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
