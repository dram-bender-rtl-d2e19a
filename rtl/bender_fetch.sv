// bender_fetch: fetch stage of the programmable core.
//
// Presents one instruction address per cycle to the instruction memory (or,
// for a periodic-operation program, to the scheduler's program memory; the
// source is latched at start and selects which memory the top reads).  The
// memories have a two-cycle registered read, so the fetch stage tracks a
// valid bit and a PC for each of the two instructions in flight; the second
// is the instruction the decode stage sees.
//
//   start     begin fetching at start_pc (core idle)
//   stall     decode cannot accept: the whole fetch pipeline, memory output
//             registers included (if_ren low), holds
//   hold      decode accepted a control-flow instruction or END: stop
//             fetching and squash the two younger instructions in flight
//   redirect  third execute stage resolved the control-flow instruction:
//             restart fetching at redirect_pc
//
// Timing: a control-flow instruction that is in decode in cycle d is
// resolved in cycle d+3, the next address goes out in d+4 and the next
// instruction is in decode in d+6, taken or not: a fixed six-cycle penalty,
// as the paper states.  The two-cycle memory latency that makes it six is
// this design's choice.
module bender_fetch #(
  parameter int unsigned AW = 11
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic [AW-1:0] start_pc,
  input  logic          start_src,
  input  logic          stall,
  input  logic          hold,
  input  logic          redirect,
  input  logic [AW-1:0] redirect_pc,
  // instruction memory read port
  output logic          if_ren,
  output logic [AW-1:0] if_addr,
  output logic          if_src,
  // to decode
  output logic          dec_valid,
  output logic [AW-1:0] dec_pc
);
  logic          active;
  logic [AW-1:0] pc, p1, p2;
  logic          v1, v2;

  assign if_ren    = !stall;
  assign if_addr   = pc;
  assign dec_valid = v2;
  assign dec_pc    = p2;

  always_ff @(posedge clk) begin
    if (rst) begin
      active <= 1'b0;
      v1     <= 1'b0;
      v2     <= 1'b0;
      pc     <= '0;
      p1     <= '0;
      p2     <= '0;
      if_src <= 1'b0;
    end else if (start) begin
      pc     <= start_pc;
      active <= 1'b1;
      v1     <= 1'b0;
      v2     <= 1'b0;
      if_src <= start_src;
    end else if (redirect) begin
      pc     <= redirect_pc;
      active <= 1'b1;
      v1     <= 1'b0;
      v2     <= 1'b0;
    end else if (hold) begin
      active <= 1'b0;
      v1     <= 1'b0;
      v2     <= 1'b0;
    end else if (!stall) begin
      v1 <= active;
      p1 <= pc;
      v2 <= v1;
      p2 <= p1;
      if (active) pc <= pc + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (rst) !(hold && stall));
endmodule
