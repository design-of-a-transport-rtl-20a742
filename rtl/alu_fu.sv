// alu_fu: integer arithmetic-logic unit of the processor.
//
// Operations (opcode on the trigger move): ADD, SUB (in1 - in2), AND, IOR, XOR, SHL, SHR
// (arithmetic), SHRU (logical), EQ, GT, GTU (result 0/1, for the boolean register file), MUL
// (low word of the signed product), MAX and MIN. in1 is an operand register written by a
// move, in2 arrives with the trigger; an in1 written in the trigger cycle is used at once. The
// result is registered and readable one cycle after the trigger. `stall` freezes the unit.
//
// From the paper: add, subtract and shifts in the ALU; multiplications are counted among the
// processor's operations (correction terms and interleaver addresses), so the multiply is put
// here. Own choices: the exact operation list, encodings and single-cycle latency.
module alu_fu
  import tta_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             stall,
  input  logic             op_we,
  input  word_t            op_data,
  input  logic             trig_we,
  input  word_t            trig_data,
  input  logic [OPC_W-1:0] trig_opc,
  output word_t            result
);
  word_t in1_q, a, b, r;

  assign a = op_we ? op_data : in1_q;
  assign b = trig_data;

  always_comb begin
    case (alu_op_e'(trig_opc))
      ALU_ADD:  r = a + b;
      ALU_SUB:  r = a - b;
      ALU_AND:  r = a & b;
      ALU_IOR:  r = a | b;
      ALU_XOR:  r = a ^ b;
      ALU_SHL:  r = a <<< b[4:0];
      ALU_SHR:  r = a >>> b[4:0];
      ALU_SHRU: r = word_t'($unsigned(a) >> b[4:0]);
      ALU_EQ:   r = word_t'(a == b);
      ALU_GT:   r = word_t'(a > b);
      ALU_GTU:  r = word_t'($unsigned(a) > $unsigned(b));
      ALU_MUL:  r = a * b;
      ALU_MAX:  r = (a > b) ? a : b;
      ALU_MIN:  r = (a < b) ? a : b;
      default:  r = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in1_q  <= '0;
      result <= '0;
    end else if (!stall) begin
      if (op_we)   in1_q  <= op_data;
      if (trig_we) result <= r;
    end
  end
endmodule
