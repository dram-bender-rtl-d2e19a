// tb_bender_exec_pipe: random execute micro-ops against a reference model
// of the instruction semantics.  A micro-op given in EXE1 at edge t has its
// register / wide-data / scratchpad write on the outputs during the cycle
// after edge t+1 (EXE2) and its branch redirect or load write-back after
// edge t+2 (EXE3).  The scratchpad is modelled with a one-cycle registered
// read.  A back-to-back stream checks that micro-ops overlap in the three
// stages without disturbing one another.
module tb_bender_exec_pipe;
  import bender_pkg::*;
  localparam int unsigned AW = 11, SP_AW = 10;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  exec_uop_t uop_in;
  logic [NREG-1:0][XLEN-1:0] rf;
  logic [2:0][XLEN-1:0] perf;
  logic wa_en, wl_en, ww_en, sp_we, sp_re, redirect, end_retire, busy;
  logic [3:0] wa_addr, wl_addr;
  logic [XLEN-1:0] wa_data, wl_data, ww_data, sp_wdata, sp_rdata;
  logic [$clog2(WIDE_WORDS)-1:0] ww_idx;
  logic [SP_AW-1:0] sp_waddr, sp_raddr;
  logic [AW-1:0] redirect_pc;
  logic [XLEN-1:0] spm [1 << SP_AW];

  bender_exec_pipe #(.AW(AW), .SP_AW(SP_AW)) dut (.*);

  always_ff @(posedge clk) begin
    if (sp_we) spm[sp_waddr] <= sp_wdata;
    if (sp_re) sp_rdata <= spm[sp_raddr];
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam op_e OPS [11] = '{OP_ARITH, OP_ARITHI, OP_LI, OP_LD, OP_ST, OP_BL, OP_BEQ, OP_JUMP, OP_LDWD, OP_LDPC, OP_END};

  function automatic logic [XLEN-1:0] alu(input logic [8:0] fn, input logic [XLEN-1:0] x, input logic [XLEN-1:0] y);
    case (fn)
      9'd1: return x & y;
      9'd2: return x | y;
      9'd3: return x ^ y;
      9'd4: return x + y;
      9'd5: return x - y;
      9'd6: return x;
      9'd7: return (x >> 1) | (x << 31);
      default: return 0;
    endcase
  endfunction

  int n_taken = 0, n_ld = 0;
  initial begin
    uop_in = '0; perf = '{32'd7, 32'd8, 32'd9};
    for (int i = 0; i < (1 << SP_AW); i++) spm[i] = $urandom;
    for (int i = 0; i < NREG; i++) rf[i] = $urandom_range(40);
    sp_rdata = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 4000; n++) begin
      exec_uop_t u;
      logic [XLEN-1:0] a, b, exp;
      bit tk;
      @(negedge clk);
      u = '0;
      u.valid = 1; u.op = OPS[$urandom_range(10)]; u.fn = 9'($urandom_range(1, 7));
      u.rd = 4'($urandom); u.rs1 = 4'($urandom); u.rs2 = 4'($urandom);
      u.imm16 = ($urandom_range(1)) ? 16'($urandom_range(40)) : 16'($urandom);
      if (u.op == OP_LDPC) u.imm16 = 16'($urandom_range(2));
      u.imm12 = 12'($urandom); u.next_pc = 16'($urandom_range(2047));
      for (int i = 0; i < NREG; i++) rf[i] = ($urandom_range(1)) ? $urandom_range(40) : $urandom;
      uop_in = u;
      a = rf[u.rs1]; b = rf[u.rs2];
      @(posedge clk); #1;
      uop_in = '0;
      // EXE2
      case (u.op)
        OP_ARITH:  check(wa_en && wa_addr == u.rd && wa_data == alu(u.fn, a, b), "ARITH");
        OP_ARITHI: check(wa_en && wa_addr == u.rd && wa_data == alu(u.fn, a, 32'(u.imm16)), "ARITHI");
        OP_LI:     check(wa_en && wa_addr == u.rd && wa_data == 32'(u.imm16), "LI");
        OP_LDPC:   check(wa_en && wa_addr == u.rd && wa_data == perf[u.imm16], "LDPC");
        OP_LDWD:   check(ww_en && ww_idx == u.imm16[3:0] && ww_data == a && !wa_en, "LDWD");
        OP_ST:     check(sp_we && sp_waddr == a[SP_AW-1:0] && sp_wdata == b && !wa_en, "ST");
        OP_LD:     check(sp_re && sp_raddr == a[SP_AW-1:0] && !wa_en, "LD read");
        default:   check(!wa_en && !ww_en && !sp_we, "no write");
      endcase
      exp = spm[a[SP_AW-1:0]];
      check(!redirect, "no redirect in EXE2");
      @(posedge clk); #1;
      // EXE3
      tk = (u.op == OP_BL && a < b) || (u.op == OP_BEQ && a == b);
      if (u.op == OP_LD) begin
        n_ld++;
        check(wl_en && wl_addr == u.rd && wl_data == exp, "LD write-back in EXE3");
      end else check(!wl_en, "no load write-back");
      if (u.op inside {OP_BL, OP_BEQ}) begin
        if (tk) n_taken++;
        check(redirect && redirect_pc == (tk ? AW'(u.imm12) : AW'(u.next_pc)), "conditional branch target");
      end else if (u.op == OP_JUMP) check(redirect && redirect_pc == AW'(u.imm16), "JUMP target");
      else check(!redirect, "no redirect");
      check(end_retire == (u.op == OP_END), "END retire");
      check(busy, "busy while in flight");
      @(posedge clk); #1;
      check(!busy, "pipeline drained");
    end
    // back-to-back: three LIs, one per cycle, each writes in its own cycle
    @(negedge clk);
    for (int k = 0; k < 3; k++) begin
      uop_in = '0; uop_in.valid = 1; uop_in.op = OP_LI; uop_in.rd = 4'(k); uop_in.imm16 = 16'(100 + k);
      @(posedge clk); #1;
      check(wa_en && wa_addr == 4'(k) && wa_data == 32'(100 + k), "back-to-back LI");
    end
    uop_in = '0;
    @(posedge clk); #1; check(!wa_en, "stream ends");
    check(n_taken > 10 && n_ld > 10, "branches taken and loads seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
