// bool_rf: the boolean register file; its registers guard moves.
//
// One write port stores bit 0 of the moved value (a compare result of the ALU), one read port
// returns a register as 0/1, and `bits` exposes all registers to the guard logic of the
// interconnect. Writes take effect at the end of the cycle; `stall` blocks them. The paper
// has a single boolean register file; its two registers are this design's choice.
module bool_rf
  import tta_pkg::*;
#(
  parameter int unsigned NUM_REGS = 2,
  localparam int unsigned IW      = (NUM_REGS > 1) ? $clog2(NUM_REGS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                stall,
  input  logic                we,
  input  logic [IW-1:0]       widx,
  input  word_t               wdata,
  input  logic [IW-1:0]       ridx,
  output word_t               rdata,
  output logic [NUM_REGS-1:0] bits
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               bits <= '0;
    else if (!stall && we)    bits[widx] <= wdata[0];
  end
  assign rdata = word_t'(bits[ridx]);
endmodule
