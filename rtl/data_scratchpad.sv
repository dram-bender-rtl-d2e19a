// data_scratchpad: program data memory of the programmable core.
//
// DEPTH words of WIDTH bits, accessed by the LD and ST instructions in the
// second execute stage.  A store writes at the end of that cycle; a load's
// address is presented in the same stage and its data is registered, so it
// is available one cycle later, in the third execute stage, where LD writes
// the register file.  A read and a write of the same address in one cycle
// return the old word.
//
// 1024 words of 32 bits are the paper's numbers; the one-cycle read latency
// follows from the paper's statement that loads write the register file one
// stage later than other instructions.
module data_scratchpad #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
