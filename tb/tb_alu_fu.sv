// tb_alu_fu: self-checking test of the ALU.
//
// Random operands for every operation, compared with an arithmetic model; the result must
// appear one cycle after the trigger. Also checks in1 persistence and that `stall` blocks
// the operation.
module tb_alu_fu;
  import tta_pkg::*;

  logic clk = 0, rst_n = 0, stall = 0;
  logic op_we = 0;
  word_t op_data = '0;
  logic trig_we = 0;
  word_t trig_data = '0;
  logic [3:0] trig_opc = '0;
  word_t result;
  int checks = 0, failures = 0;

  alu_fu dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int model(input int op, input int a, input int b);
    longint p;
    case (op)
      0: return a + b;
      1: return a - b;
      2: return a & b;
      3: return a | b;
      4: return a ^ b;
      5: return a << (b & 31);
      6: return a >>> (b & 31);
      7: return int'(unsigned'(a) >> (b & 31));
      8: return (a == b) ? 1 : 0;
      9: return (a > b) ? 1 : 0;
      10: return (unsigned'(a) > unsigned'(b)) ? 1 : 0;
      11: begin p = longint'(a) * longint'(b); return int'(p); end
      12: return (a > b) ? a : b;
      13: return (a < b) ? a : b;
      default: return 0;
    endcase
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1400; t++) begin
      automatic int op = t % 14;
      automatic int a = int'($urandom);
      automatic int b = int'($urandom);
      if (t % 3 == 0) begin a = int'($urandom_range(0, 20)) - 10; b = int'($urandom_range(0, 20)) - 10; end
      @(negedge clk);
      op_we = 1; op_data = a; trig_we = 1; trig_data = b; trig_opc = 4'(op);
      @(negedge clk);
      op_we = 0; trig_we = 0;
      check(result == model(op, a, b), $sformatf("op %0d a %0d b %0d got %0d", op, a, b, result));
    end
    // in1 persists
    @(negedge clk);
    trig_we = 1; trig_data = 7; trig_opc = 4'(ALU_ADD);
    op_we = 1; op_data = 100;
    @(negedge clk);
    op_we = 0; trig_data = 9; trig_opc = 4'(ALU_SUB);
    @(negedge clk);
    trig_we = 0;
    check(result == 91, "in1 kept");
    // stall
    stall = 1; trig_we = 1; trig_data = 1; trig_opc = 4'(ALU_ADD);
    @(negedge clk);
    stall = 0; trig_we = 0;
    @(negedge clk);
    check(result == 91, "stall blocks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
