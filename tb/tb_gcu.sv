// tb_gcu: self-checking test of the global control unit: sequential stepping, JUMP taking
// effect in the next cycle, CALL saving pc+1, return through the RA register, writes to RA,
// and the pc held by `stall`.
module tb_gcu;
  import tta_pkg::*;
  logic clk = 0, rst_n = 0, stall = 0, op_we = 0, trig_we = 0;
  word_t op_data = '0, trig_data = '0, ra;
  logic [3:0] trig_opc = '0;
  logic [9:0] pc;
  int checks = 0, failures = 0;

  gcu #(.PC_W(10)) dut (.*);

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

  initial begin
    repeat (2) @(negedge clk);
    check(pc == 0, "reset pc");
    rst_n = 1;
    for (int i = 1; i <= 5; i++) begin @(negedge clk); check(pc == 10'(i), "step"); end
    trig_we = 1; trig_data = 300; trig_opc = 4'(GCU_JUMP);
    @(negedge clk);
    trig_we = 0;
    check(pc == 300, "jump");
    @(negedge clk);
    check(pc == 301, "after jump");
    trig_we = 1; trig_data = 700; trig_opc = 4'(GCU_CALL);
    @(negedge clk);
    trig_we = 0;
    check(pc == 700 && ra == 302, "call");
    @(negedge clk);
    trig_we = 1; trig_data = ra; trig_opc = 4'(GCU_JUMP);
    @(negedge clk);
    trig_we = 0;
    check(pc == 302, "return");
    op_we = 1; op_data = 77;
    @(negedge clk);
    op_we = 0;
    check(ra == 77, "ra write");
    stall = 1;
    repeat (3) @(negedge clk);
    check(pc == 303, "stall holds pc");
    stall = 0;
    @(negedge clk);
    check(pc == 304, "resume");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
