// tta_imem: instruction memory of the processor.
//
// DEPTH instructions of NUM_BUSES move slots each. A host loads the program through the write
// port (normally while the core is held in reset); the core reads the instruction at `pc`
// combinationally, so it executes in the cycle the pc points at it. The paper does not
// describe the instruction memory; depth and organisation are this design's choice.
module tta_imem
  import tta_pkg::*;
#(
  parameter int unsigned NUM_BUSES = 30,
  parameter int unsigned DEPTH     = 1024,
  localparam int unsigned AW       = $clog2(DEPTH)
) (
  input  logic                          clk,
  input  logic                          we,
  input  logic [AW-1:0]                 waddr,
  input  logic [NUM_BUSES*MOVE_W-1:0]   wdata,
  input  logic [AW-1:0]                 pc,
  output logic [NUM_BUSES*MOVE_W-1:0]   instr
);
  logic [NUM_BUSES*MOVE_W-1:0] mem [DEPTH];
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;
  assign instr = mem[pc];
endmodule
