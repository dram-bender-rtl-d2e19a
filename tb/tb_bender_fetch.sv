// tb_bender_fetch: scenario test of the fetch stage.  The fetch stage keeps
// the program counter and two valid bits that follow the two-cycle
// instruction-memory read, so the instruction at address a reaches decode
// two edges after a was put on if_addr.  Checked here with expected PC
// sequences written out by hand:
//   start at 10      -> decode sees 10, 11, 12, ... from the 2nd edge on
//   stall for 3      -> decode keeps the same PC and if_ren is low
//   hold (branch)    -> decode input empties and stays empty
//   redirect to 40   -> decode sees 40 two edges after the redirect edge,
//                       so with a branch resolved three stages after decode
//                       the next useful decode is six cycles after the branch
//   start_src        -> latched on start, selects the memory being fetched
module tb_bender_fetch;
  localparam int unsigned AW = 11;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic start, start_src, stall, hold, redirect;
  logic [AW-1:0] start_pc, redirect_pc, if_addr, dec_pc;
  logic if_ren, if_src, dec_valid;

  bender_fetch #(.AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic idle_in(); start = 0; stall = 0; hold = 0; redirect = 0; endtask

  initial begin
    idle_in(); start_pc = '0; start_src = 0; redirect_pc = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    check(!dec_valid, "idle after reset");
    // start at 10 from the maintenance memory
    start = 1; start_pc = 10; start_src = 1; tick(); idle_in();
    check(if_addr == 10 && if_src && if_ren, "start sets PC and source");
    check(!dec_valid, "nothing in decode one edge after start");
    tick(); check(!dec_valid, "nothing in decode before the memory latency");
    tick(); check(dec_valid && dec_pc == 10, "first instruction after two edges");
    for (int i = 11; i < 15; i++) begin tick(); check(dec_valid && dec_pc == AW'(i), $sformatf("sequential %0d", i)); end
    // stall three cycles
    stall = 1; #1 check(!if_ren, "if_ren low during stall");
    repeat (3) begin tick(); check(dec_valid && dec_pc == 14, "held during stall"); end
    stall = 0;
    tick(); check(dec_valid && dec_pc == 15, "resume after stall");
    // hold: a branch sits in decode
    hold = 1; tick(); hold = 0;
    for (int i = 0; i < 4; i++) begin check(!dec_valid, "empty after hold"); tick(); end
    // redirect to 40
    redirect = 1; redirect_pc = 40; tick(); idle_in();
    check(if_addr == 40, "redirect PC");
    check(!dec_valid, "bubble 1 after redirect");
    tick(); check(!dec_valid, "bubble 2 after redirect");
    tick(); check(dec_valid && dec_pc == 40, "target in decode two edges after redirect");
    tick(); check(dec_valid && dec_pc == 41, "target + 1");
    // a new start squashes whatever is in flight and switches source
    start = 1; start_pc = 0; start_src = 0; tick(); idle_in();
    check(!dec_valid && !if_src && if_addr == 0, "restart on user memory");
    tick(); tick(); check(dec_valid && dec_pc == 0, "restart first instruction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
