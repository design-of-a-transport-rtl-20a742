// gcu: global control unit, the program counter of the processor.
//
// The instruction at `pc` executes in the current cycle. A trigger move with opcode JUMP sets
// the next pc to the moved address; CALL does the same and saves pc+1 in the return-address
// register, readable as `ra`. The return-address register can also be written by a move
// (operand port), so a return is a JUMP from `ra`. Without a jump the pc steps by one. The
// jump takes effect in the next cycle: there are no delay slots. `stall` (global lock)
// holds the pc so the locked instruction is issued again. The pc resets to 0. The paper
// names the unit only; this organisation is this design's choice.
module gcu
  import tta_pkg::*;
#(
  parameter int unsigned PC_W = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             stall,
  input  logic             op_we,
  input  word_t            op_data,
  input  logic             trig_we,
  input  word_t            trig_data,
  input  logic [OPC_W-1:0] trig_opc,
  output logic [PC_W-1:0]  pc,
  output word_t            ra
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0;
      ra <= '0;
    end else if (!stall) begin
      pc <= trig_we ? trig_data[PC_W-1:0] : pc + 1'b1;
      if (trig_we && gcu_op_e'(trig_opc) == GCU_CALL) ra <= word_t'(pc) + word_t'(1);
      else if (op_we)                                 ra <= op_data;
    end
  end
endmodule
