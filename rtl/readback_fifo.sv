// readback_fifo: buffers data read from the DRAM module until the host
// collects it.
//
// Each entry is one DRAM data transfer (512 bits for a 64-bit DDR4 module
// with burst length 8).  The DRAM side pushes one entry per returned READ;
// the frontend pops entries as the host link accepts them.  The output is
// first-word-fall-through: `rd_data` shows the oldest entry whenever
// `empty` is low, and `pop` removes it.
//
// `free` tells the core how many entries are unused; the core combines it
// with the READs it has issued but not yet seen return to decide whether a
// hinted DRAM command sequence may start (readback-stall avoidance).  A push
// into a full FIFO is dropped and sets the sticky `overflow` flag, which
// only a program that lies in its hints (or omits them) can cause.
//
// Depth 512 x 512 bits (32 KiB) is the paper's size.  First-word-fall-
// through output, drop-on-full and the overflow flag are this design's
// choices.
module readback_fifo #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             clr_overflow,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [AW:0]      count,
  output logic [AW:0]      free,
  output logic             overflow
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign free    = (AW+1)'(DEPTH) - count;
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp       <= '0;
      rp       <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
      if (clr_overflow)        overflow <= 1'b0;
      else if (push && !do_push) overflow <= 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (rst) count <= (AW+1)'(DEPTH));
endmodule
