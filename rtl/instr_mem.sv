// instr_mem: the instruction memory of the programmable core.
//
// Holds DEPTH 72-bit DRAM Bender instructions.  The frontend writes it one
// instruction per cycle through the write port; the fetch stage reads it
// through the read port.  The read port is a block RAM with an output
// register: an address presented in cycle t gives its instruction in cycle
// t+2.  Both read registers are clock-enabled by `ren`, so when the core
// stalls its fetch the instruction in flight is held rather than lost.
//
// Depth (2048) and width (72) are the paper's numbers.  The two-cycle read
// latency is this design's choice; together with branch resolution in the
// third execute stage it yields the deterministic six-cycle control-flow
// penalty the paper states.
module instr_mem #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WIDTH = 72,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  // write port (frontend)
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  // read port (fetch)
  input  logic             ren,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [WIDTH-1:0] q1;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (ren) begin
      q1    <= mem[raddr];
      rdata <= q1;
    end
  end
endmodule
