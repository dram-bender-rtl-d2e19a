// tb_readback_fifo: random push/pop traffic against a queue model.  It
// checks the first-word-fall-through output (rd_data shows the oldest entry
// whenever empty is low), count / free / full / empty after every edge,
// that a push into a full FIFO is dropped and sets the sticky overflow flag,
// that a push and pop in the same cycle on a full FIFO succeeds, and that
// clr_overflow clears the flag.
module tb_readback_fifo;
  localparam int unsigned DEPTH = 16, WIDTH = 512, AW = $clog2(DEPTH);
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic clr_overflow = 0, push = 0, pop = 0;
  logic [WIDTH-1:0] wr_data = '0, rd_data;
  logic empty, full, overflow;
  logic [AW:0] count, free;
  logic [WIDTH-1:0] q [$];
  bit exp_ovf = 0;

  readback_fifo #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

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

  function automatic logic [WIDTH-1:0] rnd();
    logic [WIDTH-1:0] d;
    for (int i = 0; i < WIDTH / 32; i++) d[32*i +: 32] = $urandom;
    return d;
  endfunction

  task automatic step(input bit pu, input bit po, input bit clr);
    bit will_pop, will_push;
    @(negedge clk);
    push = pu; pop = po; clr_overflow = clr; wr_data = rnd();
    will_pop  = po && q.size() > 0;
    will_push = pu && (q.size() < DEPTH || will_pop);
    if (will_pop) begin
      check(rd_data == q[0], "head data");
    end
    @(posedge clk); #1;
    if (will_pop) void'(q.pop_front());
    if (will_push) q.push_back(wr_data);
    if (clr) exp_ovf = 0; else if (pu && !will_push) exp_ovf = 1;
    check(count == (AW+1)'(q.size()), $sformatf("count %0d vs %0d", count, q.size()));
    check(free == (AW+1)'(DEPTH - q.size()), "free");
    check(empty == (q.size() == 0) && full == (q.size() == DEPTH), "empty/full");
    check(overflow == exp_ovf, "overflow flag");
    if (q.size() > 0) check(rd_data == q[0], "fall-through head");
  endtask

  initial begin
    int n_ovf = 0, n_full_swap = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    // fill past full
    for (int i = 0; i < DEPTH + 3; i++) step(1, 0, 0);
    check(overflow, "overflow after pushing into full FIFO");
    if (overflow) n_ovf++;
    // push and pop together while full
    step(1, 1, 0); if (q.size() == DEPTH) n_full_swap++;
    step(0, 0, 1);
    check(!overflow, "overflow cleared");
    for (int n = 0; n < 3000; n++) step($urandom_range(1), $urandom_range(1), ($urandom_range(15) == 0));
    while (q.size() > 0) step(0, 1, 0);
    step(0, 1, 0);
    check(empty && !overflow || empty, "drained");
    check(n_full_swap == 1, "simultaneous push/pop at full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
