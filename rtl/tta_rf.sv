// tta_rf: general-purpose register file with one write and one read port.
//
// A move to register r of the file writes it at the end of the cycle; a move from register r
// reads it combinationally in the same cycle (the value before that cycle's write). `stall`
// blocks writes. The paper uses several such files to keep metrics in registers; their number
// and size here are this design's choice. Registers reset to zero.
module tta_rf
  import tta_pkg::*;
#(
  parameter int unsigned NUM_REGS = 32,
  localparam int unsigned IW      = $clog2(NUM_REGS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          stall,
  input  logic          we,
  input  logic [IW-1:0] widx,
  input  word_t         wdata,
  input  logic [IW-1:0] ridx,
  output word_t         rdata
);
  word_t regs [NUM_REGS];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_REGS; i++) regs[i] <= '0;
    end else if (!stall && we) begin
      regs[widx] <= wdata;
    end
  end
  assign rdata = regs[ridx];
endmodule
